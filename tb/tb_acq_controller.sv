// tb_acq_controller -- arming, pre-trigger fill, post-trigger count and
// hand-off of the recorder.
//
// Each scenario arms the controller with a post-trigger length, optionally
// pulses the trigger during the pre-trigger fill (must be ignored), triggers
// after a random wait, and then checks against numbers worked out from the
// settings: the number of samples written before the trigger is accepted is
// at least TRACE_LEN - post_len (exactly that when the trigger is held high
// from arming), exactly post_len samples are written from the trigger on,
// trace_start is the trigger address minus the pre-trigger length, triggers
// during the hold are ignored, and 'continuous' re-arms while single-shot
// returns to idle. Out-of-range post lengths (0, > 128) and cancel are also
// exercised.
module tb_acq_controller;
  import daq_pkg::*;
  localparam int TL = 128;
  logic clk = 1'b0, rst_n = 1'b0;
  logic arm = 0, cancel = 0, continuous = 0, trig = 0, trace_done = 0;
  logic [7:0] post_len = 8'd112;
  logic wr_en, trace_valid;
  logic [6:0] wr_ptr, trace_start;
  acq_state_e state;
  int checks = 0, failures = 0;

  acq_controller #(.TRACE_LEN(TL)) dut (.*);

  always #4 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One trace. hold_trig: trigger held high from arming (measures the fill).
  task automatic run_trace(int post, bit do_arm, bit hold_trig, int wait_cycles, bit cont);
    int eff_post, pre, n_before, n_after, trig_ptr, cyc;
    bit accepted;
    eff_post = (post == 0) ? 1 : (post > TL ? TL : post);
    pre = TL - eff_post;
    continuous = cont;
    if (do_arm) begin
      @(negedge clk); arm = 1; post_len = 8'(post);
      @(negedge clk); arm = 0;
    end
    n_before = 0; n_after = 0; accepted = 0; cyc = 0; trig_ptr = 0;
    // stimulus is applied at the negedge, outputs observed there too
    while (!trace_valid) begin
      bit acc_now;
      cyc++;
      if (cyc > 5000) begin check(0, "trace never offered"); return; end
      trig = hold_trig ? 1'b1 : (cyc == 2 || cyc == wait_cycles + pre);
      acc_now = !accepted && trig && (state == ACQ_ARMED);
      if (acc_now) begin accepted = 1; trig_ptr = int'(wr_ptr); end
      if (wr_en) begin
        if (accepted) n_after++; else n_before++;
      end
      @(negedge clk);
    end
    trig = 0;
    check(accepted, "trigger accepted");
    if (hold_trig) check(n_before == pre, $sformatf("fill length %0d, expected %0d", n_before, pre));
    else           check(n_before >= pre, $sformatf("fill length %0d < %0d", n_before, pre));
    check(n_after == eff_post, $sformatf("post samples %0d, expected %0d", n_after, eff_post));
    check(int'(trace_start) == ((trig_ptr - pre) & (TL - 1)),
          $sformatf("trace_start %0d, expected %0d", trace_start, (trig_ptr - pre) & (TL - 1)));
    check(int'(wr_ptr) == ((trig_ptr + eff_post) & (TL - 1)), "write pointer stopped after the trace");
    // hold: no writes, extra triggers ignored, trace stays offered
    for (int k = 0; k < 20; k++) begin
      trig = (k % 3 == 0);
      @(negedge clk);
      check(trace_valid && !wr_en, "trace held while waiting for the DMA");
    end
    trig = 0;
    trace_done = 1; @(negedge clk); trace_done = 0;
    if (cont) check(wr_en && state != ACQ_HOLD && state != ACQ_IDLE, "continuous mode re-armed");
    else      check(state == ACQ_IDLE && !wr_en, "single shot returned to idle");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == ACQ_IDLE && !wr_en && !trace_valid, "idle after reset");
    run_trace(112, 1, 1, 0, 0);          // default setting, fill measured
    run_trace(112, 1, 0, 37, 0);
    run_trace(64, 1, 1, 0, 0);
    run_trace(1, 1, 0, 5, 0);
    run_trace(128, 1, 0, 9, 0);          // no pre-trigger history
    run_trace(0, 1, 1, 0, 0);            // clamps to 1
    run_trace(200, 1, 1, 0, 0);          // clamps to 128
    for (int i = 0; i < 40; i++)
      run_trace($urandom_range(1, 128), 1, $urandom_range(0, 1), $urandom_range(1, 300), 0);
    // continuous: re-arms itself, the second trace needs no arm
    run_trace(100, 1, 1, 0, 1);
    run_trace(100, 0, 1, 0, 1);
    run_trace(100, 0, 0, 50, 0);
    // cancel from ARMED
    @(negedge clk); arm = 1; post_len = 8'd112;
    @(negedge clk); arm = 0;
    repeat (30) @(negedge clk);
    check(state == ACQ_ARMED, "armed after the fill");
    cancel = 1; @(negedge clk); cancel = 0;
    check(state == ACQ_IDLE && !wr_en, "cancel returns to idle");
    trig = 1; repeat (3) @(negedge clk); trig = 0;
    check(state == ACQ_IDLE, "trigger ignored while idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
