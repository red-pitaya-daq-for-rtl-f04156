// trigger_select -- picks the trigger source and issues one common trigger.
//
// The stock Red Pitaya firmware captures the two channels one after the
// other even in its split-trigger mode. Here a single trigger, chosen by the
// source code below, freezes both channels in the same clock cycle, so every
// event holds a time-aligned pair of traces (high-sensitivity channel A and
// high-dynamic-range channel B).
//
// Sources (daq_pkg::trig_src_e): 0 off, 1 software trigger, 2/3 channel A
// rising/falling crossing, 4/5 channel B rising/falling, 10/11 either channel
// rising/falling. Codes 1..5 keep the Red Pitaya oscilloscope numbering; the
// either-channel codes are this design's addition. Unused codes never fire.
//
// Interface and timing: purely combinational; 'trig' is high in the same
// cycle as the selected input pulse.
module trigger_select
#(
  parameter int unsigned NCH = daq_pkg::NCH
) (
  input  logic [3:0]     src,
  input  logic           sw_trig,
  input  logic [NCH-1:0] rise,
  input  logic [NCH-1:0] fall,
  output logic           trig
);

  import daq_pkg::*;

  always_comb begin
    unique case (src)
      TRIG_NOW:      trig = sw_trig;
      TRIG_A_RISE:   trig = rise[0];
      TRIG_A_FALL:   trig = fall[0];
      TRIG_B_RISE:   trig = rise[1];
      TRIG_B_FALL:   trig = fall[1];
      TRIG_ANY_RISE: trig = |rise;
      TRIG_ANY_FALL: trig = |fall;
      default:       trig = 1'b0;
    endcase
  end

endmodule
