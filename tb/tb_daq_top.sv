// tb_daq_top -- end-to-end test of the dual-channel trigger-and-capture
// firmware at its default sizes (128-sample traces, 14-bit samples).
//
// Stimulus: two ADC streams with random baseline noise and negative-going
// detector-like pulses (fast rise, exponential decay; channel B about a
// sixth of channel A, or either channel alone). A reference crossing
// detector here records when each channel crosses its threshold.
// A "software" thread does what the ARM program does: it configures the
// registers, polls WR_PTR, reads every stored event from the DDR model and
// advances RD_PTR.
//
// Every stored event is matched against the recorded ADC history: both
// channels must be the same 128-sample window (time-aligned), and the window
// must put a crossing of the selected trigger source at index 16 (the
// default post-trigger delay of 112). The stimulus thread then checks what
// each step should have produced. Mechanisms counted, each must occur:
// triggering on A, on B and on either channel; a pulse on the unselected
// channel ignored; a second pulse inside the dead time ignored; the circular
// buffer wrapping; the buffer full (an event waits, later pulses lost, the
// stall counter); software trigger; single-shot mode; cancel; memory
// back-pressure. With the memory always ready the trigger-to-irq latency is
// checked. Counting rising edges from the one that registers the crossing
// sample at the input: +1 the crossing flag is registered, +1 the trigger is
// accepted, +111 the last of the 112 post-trigger samples is written and the
// trace is offered, +386 the DMA has copied it and raises irq: 499 edges.
module tb_daq_top;
  import daq_pkg::*;
  localparam int POST = 112, PRE = 128 - POST;
  localparam int THR_A = -200, THR_B = -100, HYST = 20;
  localparam int LATENCY = 499;   // rising edges, see above

  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [13:0] adc_a, adc_b;
  logic [31:0] sys_addr = '0, sys_wdata = '0, sys_rdata;
  logic sys_wen = 0, sys_ren = 0, sys_err, sys_ack;
  logic m_valid, m_ready;
  logic [31:0] m_addr;
  logic [63:0] m_data;
  logic irq;

  daq_top dut (.*);
  ddr_model #(.READY_PCT(100)) u_ddr (.clk, .m_valid, .m_ready, .m_addr, .m_data);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  // ---------------------------------------------------------------- ADC streams
  int cyc = 0;                  // index of the next rising edge
  int hist_a[$], hist_b[$];     // sample sampled at rising edge i
  int xa[$], xb[$];             // reference crossing sample indices (falling)
  int amp_a = 0, amp_b = 0;     // current pulse magnitude
  int kick_a = 0, kick_b = 0;   // pulse requested, peak magnitude
  int rise_a = 0, rise_b = 0;
  bit farm_a = 0, farm_b = 0;

  function automatic int clip(int v);
    return v > 8191 ? 8191 : (v < -8192 ? -8192 : v);
  endfunction

  always @(negedge clk) begin
    int va, vb;
    if (kick_a != 0) begin rise_a = kick_a; amp_a = kick_a * 3 / 10; kick_a = 0; end
    else if (rise_a != 0) begin amp_a = rise_a; rise_a = 0; end
    else amp_a = amp_a - (amp_a >>> 3);
    if (kick_b != 0) begin rise_b = kick_b; amp_b = kick_b * 3 / 10; kick_b = 0; end
    else if (rise_b != 0) begin amp_b = rise_b; rise_b = 0; end
    else amp_b = amp_b - (amp_b >>> 3);
    va = clip(int'($urandom_range(0, 16)) - 8 - amp_a);
    vb = clip(int'($urandom_range(0, 16)) - 8 - amp_b);
    adc_a = 14'(va); adc_b = 14'(vb);
    hist_a.push_back(va); hist_b.push_back(vb);
    // reference falling-crossing detectors
    if (farm_a && va <= THR_A) begin xa.push_back(hist_a.size() - 1); farm_a = 0; end
    else if (va > THR_A + HYST) farm_a = 1;
    if (farm_b && vb <= THR_B) begin xb.push_back(hist_b.size() - 1); farm_b = 0; end
    else if (vb > THR_B + HYST) farm_b = 1;
  end
  always @(posedge clk) cyc++;

  int irq_at[$];
  // recorded at the falling edge: 'cyc' then counts the rising edge that raised
  // irq. History index i is registered by rising edge i + 2 (the first rising
  // edge comes before the first sample is driven).
  always @(negedge clk) if (rst_n && irq) irq_at.push_back(cyc);

  // ---------------------------------------------------------------- system bus
  bit bus_busy = 0;
  task automatic bus_write(logic [31:0] a, logic [31:0] d);
    while (bus_busy) @(negedge clk);
    bus_busy = 1;
    @(negedge clk); sys_addr = a; sys_wdata = d; sys_wen = 1;
    @(negedge clk); sys_wen = 0;
    check(sys_ack && !sys_err, "bus write acknowledged");
    bus_busy = 0;
  endtask
  task automatic bus_read(logic [31:0] a, output logic [31:0] d);
    while (bus_busy) @(negedge clk);
    bus_busy = 1;
    @(negedge clk); sys_addr = a; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    check(sys_ack && !sys_err, "bus read acknowledged");
    d = sys_rdata;
    bus_busy = 0;
  endtask

  // ---------------------------------------------------------------- software
  localparam logic [31:0] BASE = 32'h0800_0000, SIZE = 32'd4096;   // 8 event slots
  int cur_src = 3;
  bit sw_pause = 0;
  bit check_latency = 1;
  int ev_t0[$];                 // trigger sample index of each stored event
  int ev_latency_ok = 0;
  int n_events = 0, n_wrap = 0;
  logic [31:0] rd_off = 0;

  function automatic bit in_list(ref int q[$], input int v);
    foreach (q[i]) if (q[i] == v) return 1;
    return 0;
  endfunction

  task automatic process_event(logic [31:0] off);
    int sa[128], sb[128];
    int t, found;
    for (int w = 0; w < 64; w++) begin
      logic [63:0] d;
      d = u_ddr.peek(64'(BASE) + 64'(off) + 64'(w * 8));
      for (int l = 0; l < 4; l++) begin
        int idx;
        idx = (w % 32) * 4 + l;
        if (w < 32) sa[idx] = int'($signed(d[16*l +: 16]));
        else        sb[idx] = int'($signed(d[16*l +: 16]));
      end
    end
    found = -1;
    for (t = hist_a.size() - 128; t >= 0 && found < 0; t--) begin
      bit ok = 1;
      for (int i = 0; i < 128 && ok; i++)
        if (hist_a[t + i] != sa[i] || hist_b[t + i] != sb[i]) ok = 0;
      if (ok) found = t;
    end
    check(found >= 0, "event is an aligned window of both ADC streams");
    if (found < 0) return;
    if (cur_src == 3)  check(in_list(xa, found + PRE), "A crossing at the trigger index");
    if (cur_src == 5)  check(in_list(xb, found + PRE), "B crossing at the trigger index");
    if (cur_src == 11) check(in_list(xa, found + PRE) || in_list(xb, found + PRE), "A or B crossing at the trigger index");
    if (ev_t0.size() > 0) check(found + PRE > ev_t0[ev_t0.size() - 1], "events in time order");
    ev_t0.push_back(found + PRE);
    if (check_latency && irq_at.size() >= ev_t0.size()) begin
      check(irq_at[ev_t0.size() - 1] - (found + PRE + 2) == LATENCY,
            $sformatf("trigger-to-irq latency %0d, expected %0d", irq_at[ev_t0.size() - 1] - (found + PRE + 2), LATENCY));
      ev_latency_ok++;
    end
    n_events++;
  endtask

  initial begin : software
    logic [31:0] wr;
    wait (rst_n);
    forever begin
      repeat (50) @(negedge clk);
      if (!sw_pause) begin
        bus_read(32'h10C, wr);
        while (rd_off != wr) begin
          process_event(rd_off);
          rd_off = (rd_off + 512 >= SIZE) ? 0 : rd_off + 512;
          if (rd_off == 0) n_wrap++;
          bus_write(32'h108, rd_off);
        end
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask
  task automatic fire(int a, int b);
    @(negedge clk); kick_a = a; kick_b = b;
  endtask
  task automatic expect_new(int n_prev, int n, string what);
    idle(1500);
    check(ev_t0.size() - n_prev == n, $sformatf("%s: %0d new events, expected %0d", what, ev_t0.size() - n_prev, n));
  endtask

  int n_trig_a = 0, n_trig_b = 0, n_trig_any = 0, n_other_ignored = 0;
  int n_dead_skip = 0, n_full = 0, n_sw = 0, n_single = 0, n_cancel = 0, n_backpressure = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int b, x;
    logic [31:0] d;
    idle(4);
    rst_n = 1;
    bus_write(32'h08, 32'(THR_A));
    bus_write(32'h0C, 32'(THR_B));
    bus_write(32'h20, HYST);
    bus_write(32'h24, HYST);
    bus_write(32'h100, BASE);
    bus_write(32'h104, SIZE);
    bus_write(32'h04, 3);               // channel A, falling
    cur_src = 3;
    bus_write(32'h00, 32'h9);           // arm, continuous
    idle(200);

    // 1. trigger on channel A; B-only pulses must be ignored
    for (int i = 0; i < 5; i++) begin
      b = ev_t0.size(); x = xa.size();
      fire(600 + 700 * i, 100 + 120 * i);
      expect_new(b, 1, "A trigger");
      check(ev_t0[ev_t0.size() - 1] == xa[x], "event triggered by this A pulse");
      n_trig_a++;
      b = ev_t0.size();
      fire(0, 2000);
      expect_new(b, 0, "B pulse with source A");
      n_other_ignored++;
    end
    // 2. trigger on channel B
    bus_write(32'h04, 5); cur_src = 5;
    for (int i = 0; i < 4; i++) begin
      b = ev_t0.size(); x = xb.size();
      fire(i[0] ? 3000 : 0, 500 + 400 * i);
      expect_new(b, 1, "B trigger");
      check(ev_t0[ev_t0.size() - 1] == xb[x], "event triggered by this B pulse");
      n_trig_b++;
    end
    // 3. either channel
    bus_write(32'h04, 11); cur_src = 11;
    for (int i = 0; i < 4; i++) begin
      b = ev_t0.size();
      fire(i[0] ? 1500 : 0, i[0] ? 0 : 1500);
      expect_new(b, 1, "either-channel trigger");
      n_trig_any++;
    end
    // 4. dead time: a second pulse 200 cycles later is not recorded
    bus_write(32'h04, 3); cur_src = 3;
    for (int i = 0; i < 3; i++) begin
      b = ev_t0.size(); x = xa.size();
      fire(2500, 400);
      idle(200);
      fire(2500, 400);
      expect_new(b, 1, "pulse pair within the dead time");
      check(xa.size() - x == 2, "both pulses crossed the threshold");
      check(ev_t0[ev_t0.size() - 1] == xa[x], "first pulse of the pair recorded");
      n_dead_skip++;
    end
    // 5. buffer full: software stops reading; 7 of 8 slots fill, the 8th waits,
    //    later pulses are lost; after resuming all 8 arrive
    sw_pause = 1;
    check_latency = 0;                  // waiting events are late by design
    idle(300);
    b = ev_t0.size(); x = xa.size();
    for (int i = 0; i < 10; i++) begin
      fire(1000 + 100 * i, 200);
      idle(1200);
    end
    bus_read(32'h118, d);
    check(d[5] == 1'b1, "DMA waiting for space");
    bus_read(32'h114, d);
    check(d == 32'd1, $sformatf("one stall counted, got %0d", d));
    if (d[5] || d == 1) n_full++;
    sw_pause = 0;
    idle(3000);
    check(ev_t0.size() - b == 8, $sformatf("8 events after the full buffer, got %0d", ev_t0.size() - b));
    for (int i = 0; i < 8 && b + i < ev_t0.size(); i++)
      check(ev_t0[b + i] == xa[x + i], "events 1..8 of the burst kept in order");
    // 6. memory back-pressure
    u_ddr.ready_pct = 30;
    for (int i = 0; i < 3; i++) begin
      b = ev_t0.size();
      fire(3000, 500);
      expect_new(b, 1, "event with memory back-pressure");
      n_backpressure++;
    end
    idle(500);
    u_ddr.ready_pct = 100;
    // 7. software trigger
    bus_write(32'h04, 1); cur_src = 1;
    b = ev_t0.size();
    bus_write(32'h00, 32'h18);          // continuous + software trigger
    expect_new(b, 1, "software trigger");
    n_sw++;
    // 8. single shot: the recorder stops after one event until armed again
    bus_write(32'h04, 3); cur_src = 3;
    bus_write(32'h00, 32'h0);           // continuous off; current arming stays
    b = ev_t0.size();
    fire(2000, 300);
    expect_new(b, 1, "single shot event");
    b = ev_t0.size();
    fire(2000, 300);
    expect_new(b, 0, "no event after single shot");
    bus_write(32'h00, 32'h1);           // arm once
    idle(100);
    b = ev_t0.size();
    fire(2000, 300);
    expect_new(b, 1, "re-armed single shot");
    n_single++;
    // 9. cancel
    bus_write(32'h00, 32'h9);           // arm, continuous
    idle(100);
    bus_write(32'h00, 32'h2);           // cancel
    b = ev_t0.size();
    fire(2000, 300);
    expect_new(b, 0, "no event after cancel");
    bus_write(32'h00, 32'h9);
    idle(100);
    fire(2000, 300);
    expect_new(b, 1, "event after re-arming");
    n_cancel++;
    // mechanism summary
    bus_read(32'h110, d);
    check(d == 32'(n_events), $sformatf("event counter %0d, events read %0d", d, n_events));
    check(u_ddr.misaligned == 0, "aligned memory writes");
    check(ev_latency_ok > 0, "latency checked");
    $display("mechanisms: trigA=%0d trigB=%0d trigAny=%0d otherIgnored=%0d deadSkip=%0d full=%0d wrap=%0d sw=%0d single=%0d cancel=%0d backpressure=%0d events=%0d latencyChecked=%0d",
             n_trig_a, n_trig_b, n_trig_any, n_other_ignored, n_dead_skip, n_full, n_wrap, n_sw,
             n_single, n_cancel, n_backpressure, n_events, ev_latency_ok);
    check(n_trig_a > 0, "A trigger happened");
    check(n_trig_b > 0, "B trigger happened");
    check(n_trig_any > 0, "either-channel trigger happened");
    check(n_other_ignored > 0, "unselected channel ignored");
    check(n_dead_skip > 0, "dead-time skip happened");
    check(n_full > 0, "buffer full happened");
    check(n_wrap > 0, "buffer wrap happened");
    check(n_sw > 0, "software trigger happened");
    check(n_single > 0, "single shot happened");
    check(n_cancel > 0, "cancel happened");
    check(n_backpressure > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
