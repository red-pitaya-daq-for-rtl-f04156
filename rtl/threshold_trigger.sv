// threshold_trigger -- level-crossing detector for one ADC channel.
//
// The acquisition keeps only pulses that cross a threshold chosen above the
// SiPM dark-count noise. This block watches one channel and flags the sample
// at which it crosses the threshold. Detector pulses are negative-going in ADC
// counts, so the usual setting is the falling crossing; both directions are
// provided.
//
// How it works: a falling crossing is armed once a sample lies above
// threshold + hysteresis and fires on the first later sample at or below the
// threshold; firing disarms it. The rising crossing mirrors this (armed below
// threshold - hysteresis, fires at or above the threshold). Hysteresis keeps
// noise around the level from producing a burst of triggers. The threshold is
// from the system description; the crossing rule and the hysteresis are this
// design's choice.
//
// Interface and timing: 'sample' is a two's-complement value presented every
// clock. 'rise' / 'fall' are one-cycle pulses, registered, so they are high in
// the cycle after the crossing sample was presented. Levels are compared with
// one extra bit so threshold +/- hysteresis cannot wrap.
module threshold_trigger #(
  parameter int unsigned ADC_W = daq_pkg::ADC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] sample,
  input  logic signed [ADC_W-1:0] threshold,
  input  logic        [ADC_W-1:0] hysteresis,
  output logic                    rise,
  output logic                    fall
);

  logic signed [ADC_W+1:0] s_x, thr_x, upper, lower;
  logic rise_armed, fall_armed;
  logic rise_hit, fall_hit;

  always_comb begin
    s_x   = (ADC_W+2)'(sample);
    thr_x = (ADC_W+2)'(threshold);
    upper = thr_x + $signed({2'b00, hysteresis});
    lower = thr_x - $signed({2'b00, hysteresis});
    rise_hit = rise_armed && (s_x >= thr_x);
    fall_hit = fall_armed && (s_x <= thr_x);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rise_armed <= 1'b0;
      fall_armed <= 1'b0;
      rise       <= 1'b0;
      fall       <= 1'b0;
    end else begin
      rise <= rise_hit;
      fall <= fall_hit;
      if (rise_hit)          rise_armed <= 1'b0;
      else if (s_x < lower)  rise_armed <= 1'b1;
      if (fall_hit)          fall_armed <= 1'b0;
      else if (s_x > upper)  fall_armed <= 1'b1;
    end
  end

endmodule
