// tb_threshold_trigger -- self-checking test of the level-crossing detector.
//
// Drives directed pulses (negative and positive going, noise around the
// level) and then random walks, and compares 'rise' / 'fall' every cycle with
// a reference computed here from the crossing rule: a falling crossing is
// armed by a sample above threshold + hysteresis and fires on the first later
// sample at or below the threshold; rising mirrors it. Outputs are expected
// one cycle after the sample. Also counts the crossings seen so the run fails
// if neither direction ever fired.
module tb_threshold_trigger;
  localparam int ADC_W = 14;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [ADC_W-1:0] sample, threshold;
  logic [ADC_W-1:0] hysteresis;
  logic rise, fall;
  int checks = 0, failures = 0, n_rise = 0, n_fall = 0;

  threshold_trigger #(.ADC_W(ADC_W)) dut (.*);

  always #4 clk = ~clk;

  // reference model state
  bit ref_rarm = 0, ref_farm = 0, exp_rise = 0, exp_fall = 0;

  task automatic step(input int v);
    int thr, hy;
    bit rh, fh;
    sample = ADC_W'(v);
    thr = int'(threshold); hy = int'(hysteresis);
    rh = ref_rarm && (v >= thr);
    fh = ref_farm && (v <= thr);
    @(posedge clk);
    if (rh) ref_rarm = 0; else if (v < thr - hy) ref_rarm = 1;
    if (fh) ref_farm = 0; else if (v > thr + hy) ref_farm = 1;
    exp_rise = rh; exp_fall = fh;
    #1;
    checks++;
    if (rise !== exp_rise || fall !== exp_fall) begin
      failures++;
      if (failures < 10) $display("mismatch at sample %0d: rise=%0b/%0b fall=%0b/%0b", v, rise, exp_rise, fall, exp_fall);
    end
    n_rise += int'(rise); n_fall += int'(fall);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = '0; threshold = -14'sd200; hysteresis = 14'd20;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: a negative pulse crossing -200 exactly once
    for (int k = 0; k < 10; k++) step(3);
    for (int k = 0; k < 3; k++) step(-100 * k);        // 0, -100, -200 (fires)
    step(-800); step(-400); step(-210); step(-190);    // noise around the level: no re-fire
    step(-201); step(-185); step(-199);                 // still below upper re-arm (-180)
    step(-150); step(-205);                             // re-armed by -150, fires again
    for (int k = 0; k < 5; k++) step(0);
    // directed: positive level
    threshold = 14'sd500; hysteresis = 14'd0;
    for (int k = 0; k < 4; k++) step(0);
    step(499); step(500); step(501); step(499); step(500);
    // extremes: threshold at the ends of the range, no wrap of thr +/- hyst
    threshold = 14'sd8191; hysteresis = 14'd100;
    for (int k = 0; k < 4; k++) step(-8192 + k);
    step(8191); step(8191);
    threshold = -14'sd8192;
    step(8191); step(-8192); step(8191); step(-8192);
    // random walks with random levels
    for (int r = 0; r < 200; r++) begin
      int v;
      threshold = ADC_W'($urandom_range(0, 4000) - 2000);
      hysteresis = ADC_W'($urandom_range(0, 300));
      v = int'(threshold);
      for (int k = 0; k < 200; k++) begin
        v += int'($urandom_range(0, 400)) - 200;
        if (v > 8191) v = 8191;
        if (v < -8192) v = -8192;
        step(v);
      end
    end
    checks++;
    if (n_rise == 0 || n_fall == 0) begin
      failures++;
      $display("crossings never seen: rise=%0d fall=%0d", n_rise, n_fall);
    end
    $display("crossings: rise=%0d fall=%0d", n_rise, n_fall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
