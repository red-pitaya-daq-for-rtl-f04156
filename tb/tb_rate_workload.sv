// tb_rate_workload -- the design at its default sizes under the detector's
// specified load: pulses arriving at random (Poisson) times at an average
// 5000 per second, read out by software that spends 196.61 us per event.
//
// Pulse times are drawn with exponentially distributed gaps (mean 25 000
// clock cycles = 200 us at 125 MHz) and random amplitudes, with channel B at
// a fifth of channel A, and the trigger is the falling crossing of channel A.
// The software model polls WR_PTR, consumes one event, and then waits 24 576
// cycles (196.61 us) before the next, which is the per-event dead time of the
// acquisition software. The circular buffer (64 KiB, 127 usable slots)
// absorbs the fluctuations.
//
// Expected result, worked out here from the reference crossings: a crossing
// is recorded exactly when it comes at least 515 samples after the last
// recorded one. That is 499 cycles to store an event plus 16 to refill the
// pre-trigger history; the buffer never fills at this load. Every event must
// be the aligned 128-sample window of both channels with the crossing at
// index 16, and the recorded list must equal the expected list. Also reported:
// the largest buffer occupancy and the fraction of pulses lost to the
// firmware dead time.
module tb_rate_workload;
  localparam int PRE = 16, THR_A = -200, HYST = 20;
  localparam int N_PULSES = 300;
  localparam int MEAN_GAP = 25000;        // cycles, 5000 /s
  localparam int SW_DEAD = 24576;         // cycles, 196.61 us
  localparam int HW_DEAD = 515;           // cycles between accepted crossings
  localparam logic [31:0] BASE = 32'h0400_0000, SIZE = 32'd65536;

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [13:0] adc_a, adc_b;
  logic [31:0] sys_addr = '0, sys_wdata = '0, sys_rdata;
  logic sys_wen = 0, sys_ren = 0, sys_err, sys_ack;
  logic m_valid, m_ready;
  logic [31:0] m_addr;
  logic [63:0] m_data;
  logic irq;

  daq_top dut (.*);
  ddr_model #(.READY_PCT(90)) u_ddr (.clk, .m_valid, .m_ready, .m_addr, .m_data);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", msg);
    end
  endtask

  // ADC streams with a reference crossing detector on channel A
  int hist_a[$], hist_b[$], xa[$];
  int amp_a = 0, amp_b = 0, kick = 0, rise = 0;
  bit farm = 0;
  function automatic int clip(int v);
    return v > 8191 ? 8191 : (v < -8192 ? -8192 : v);
  endfunction
  always @(negedge clk) begin
    int va, vb;
    if (kick != 0) begin rise = kick; amp_a = kick * 3 / 10; kick = 0; end
    else if (rise != 0) begin amp_a = rise; rise = 0; end
    else amp_a = amp_a - (amp_a >>> 3);
    amp_b = amp_a / 5;
    va = clip(int'($urandom_range(0, 16)) - 8 - amp_a);
    vb = clip(int'($urandom_range(0, 16)) - 8 - amp_b);
    adc_a = 14'(va); adc_b = 14'(vb);
    hist_a.push_back(va); hist_b.push_back(vb);
    if (farm && va <= THR_A) begin xa.push_back(hist_a.size() - 1); farm = 0; end
    else if (va > THR_A + HYST) farm = 1;
  end

  task automatic bus_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); sys_addr = a; sys_wdata = d; sys_wen = 1;
    @(negedge clk); sys_wen = 0;
    check(sys_ack && !sys_err, "bus write acknowledged");
  endtask
  task automatic bus_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); sys_addr = a; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    d = sys_rdata;
  endtask

  int ev_t0[$];
  int max_used = 0;
  bit stimulus_done = 0;

  task automatic process_event(logic [31:0] off);
    int sa[128], sb[128];
    int found = -1;
    for (int w = 0; w < 64; w++) begin
      logic [63:0] d;
      d = u_ddr.peek(64'(BASE) + 64'(off) + 64'(w * 8));
      for (int l = 0; l < 4; l++) begin
        if (w < 32) sa[w * 4 + l] = int'($signed(d[16*l +: 16]));
        else        sb[(w - 32) * 4 + l] = int'($signed(d[16*l +: 16]));
      end
    end
    for (int t = hist_a.size() - 128; t >= 0 && found < 0; t--) begin
      bit ok = 1;
      for (int i = 0; i < 128 && ok; i++)
        if (hist_a[t + i] != sa[i] || hist_b[t + i] != sb[i]) ok = 0;
      if (ok) found = t;
    end
    check(found >= 0, "event is an aligned window of both ADC streams");
    ev_t0.push_back(found + PRE);
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // software: one event, then the per-event processing time
  initial begin : software
    logic [31:0] wr, rd_off;
    rd_off = 0;
    wait (rst_n);
    repeat (200) @(negedge clk);
    forever begin
      int used;
      bus_read(32'h10C, wr);
      used = int'((wr >= rd_off) ? wr - rd_off : wr + SIZE - rd_off);
      if (used > max_used) max_used = used;
      if (wr != rd_off) begin
        process_event(rd_off);
        rd_off = (rd_off + 512 >= SIZE) ? 0 : rd_off + 512;
        repeat (SW_DEAD) @(negedge clk);
        bus_write(32'h108, rd_off);
      end else if (stimulus_done) begin
        break;
      end else begin
        repeat (20) @(negedge clk);
      end
    end
    finish_run();
  end

  task automatic finish_run();
    int expect_t0[$];
    int last;
    logic [31:0] d;
    last = -1000000;
    foreach (xa[i]) if (xa[i] - last >= HW_DEAD) begin expect_t0.push_back(xa[i]); last = xa[i]; end
    check(ev_t0.size() == expect_t0.size(),
          $sformatf("%0d events recorded, %0d expected", ev_t0.size(), expect_t0.size()));
    for (int i = 0; i < ev_t0.size() && i < expect_t0.size(); i++)
      check(ev_t0[i] == expect_t0[i], $sformatf("event %0d at %0d, expected %0d", i, ev_t0[i], expect_t0[i]));
    bus_read(32'h114, d);
    check(d == 0, "no stall at 5000 events/s with a 64 KiB buffer");
    check(xa.size() >= N_PULSES - 2, "pulses crossed the threshold");
    $display("pulses=%0d crossings=%0d recorded=%0d lost_to_dead_time=%0d max_buffer_bytes=%0d sim_cycles=%0d",
             N_PULSES, xa.size(), ev_t0.size(), xa.size() - ev_t0.size(), max_used, hist_a.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : stimulus
    idle_init();
    bus_write(32'h08, 32'(THR_A));
    bus_write(32'h20, HYST);
    bus_write(32'h100, BASE);
    bus_write(32'h104, SIZE);
    bus_write(32'h04, 3);              // channel A, falling
    bus_write(32'h00, 32'h9);          // arm, continuous
    repeat (100) @(negedge clk);
    for (int i = 0; i < N_PULSES; i++) begin
      real u;
      int gap;
      u = (real'($urandom_range(1, 1000000))) / 1000000.0;
      gap = int'(-$ln(u) * MEAN_GAP);
      if (i == 7) gap = 300;           // one forced pile-up inside the dead time
      repeat (gap) @(negedge clk);
      kick = $urandom_range(400, 7000);
    end
    repeat (3000) @(negedge clk);
    stimulus_done = 1;
  end

  task automatic idle_init();
    repeat (4) @(negedge clk);
    rst_n = 1;
  endtask
endmodule
