// tb_dma_writer -- copy of frozen traces into the circular DDR buffer.
//
// Two ring memories with one-cycle read latency stand in for the channel
// buffers; they are filled with random samples and a random trace start is
// offered. The DDR model stores what the DMA writes. Checks, against values
// computed here: every word of every event (channel A then B, oldest sample
// first, four sign-extended 16-bit samples per word, lowest in the low bits)
// at buf_base + wr_ptr; wr_ptr advancing by 512 and wrapping at buf_size; the
// event counter; the full rule (an event waits while no more than 512 bytes
// are free, counts once as a stall and proceeds when rd_ptr moves); and the
// transfer time of 386 cycles with the memory always ready. A second phase
// repeats with random back-pressure on the memory port.
module tb_dma_writer;
  localparam int TL = 128, ADC_W = 14, EVB = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cancel = 0;
  logic [31:0] buf_base, buf_size, rd_ptr, wr_ptr;
  logic trace_valid = 0, trace_done;
  logic [6:0] trace_start, rd_addr;
  logic [ADC_W-1:0] rd_data [2];
  logic m_valid, m_ready;
  logic [31:0] m_addr;
  logic [63:0] m_data;
  logic busy, waiting_full;
  logic [31:0] event_count, full_stalls;
  logic [ADC_W-1:0] ring [2][TL];
  int checks = 0, failures = 0;
  int ready_pct = 100;
  int n_wrap = 0, n_stall = 0;

  dma_writer #(.TRACE_LEN(TL), .ADC_W(ADC_W)) dut (.*);

  // memory with switchable back-pressure
  logic [63:0] mem [longint unsigned];
  always @(posedge clk) begin
    if (m_valid && m_ready) mem[longint'(m_addr)] = m_data;
    m_ready <= ($urandom_range(0, 99) < ready_pct);
  end

  always_ff @(posedge clk) begin
    rd_data[0] <= ring[0][rd_addr];
    rd_data[1] <= ring[1][rd_addr];
  end

  always #4 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // offer one trace, wait for done, return cycles from offer to done
  task automatic one_event(output int cycles);
    cycles = 0;
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < TL; i++) ring[c][i] = ADC_W'($urandom);
    trace_start = 7'($urandom);
    @(negedge clk); trace_valid = 1;
    do begin
      @(posedge clk); cycles++;
      #1;
    end while (!trace_done && cycles < 20000);
    @(negedge clk); trace_valid = 0;
  endtask

  task automatic check_event(logic [31:0] off);
    for (int w = 0; w < 2 * TL / 4; w++) begin
      logic [63:0] exp_w, got;
      longint unsigned addr;
      int c;
      c = w / (TL / 4);
      for (int l = 0; l < 4; l++) begin
        int idx;
        idx = (int'(trace_start) + (w % (TL / 4)) * 4 + l) % TL;
        exp_w[16*l +: 16] = 16'($signed(ring[c][idx]));
      end
      addr = longint'(buf_base) + longint'(off) + longint'(w * 8);
      got = mem.exists(addr) ? mem[addr] : 64'hDEAD_DEAD_DEAD_DEAD;
      check(got === exp_w, $sformatf("word %0d at %h: %h expected %h", w, addr, got, exp_w));
    end
  endtask

  initial begin
    int cyc;
    logic [31:0] exp_wr;
    int exp_events;
    buf_base = 32'h1000_0000; buf_size = 32'd2048; rd_ptr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exp_wr = 0; exp_events = 0;
    // phase 1: memory always ready, software keeps up
    for (int e = 0; e < 10; e++) begin
      one_event(cyc);
      check(cyc == 386, $sformatf("transfer took %0d cycles, expected 386", cyc));
      check_event(exp_wr);
      exp_wr = (exp_wr + EVB) % buf_size;
      if (exp_wr == 0) n_wrap++;
      exp_events++;
      @(negedge clk);
      check(wr_ptr == exp_wr, $sformatf("wr_ptr %0d expected %0d", wr_ptr, exp_wr));
      check(event_count == 32'(exp_events), "event count");
      rd_ptr = wr_ptr;     // software consumed everything
    end
    // phase 2: software stops reading; 3 events fit in 2048 bytes, the 4th waits
    for (int e = 0; e < 3; e++) begin
      one_event(cyc);
      check_event(exp_wr);
      exp_wr = (exp_wr + EVB) % buf_size;
      if (exp_wr == 0) n_wrap++;
    end
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < TL; i++) ring[c][i] = ADC_W'($urandom);
    trace_start = 7'($urandom);
    @(negedge clk); trace_valid = 1;
    repeat (500) @(negedge clk);
    check(!trace_done && waiting_full && busy, "event waits while the buffer is full");
    check(full_stalls == 32'd1, $sformatf("one stall counted, got %0d", full_stalls));
    n_stall += int'(waiting_full);
    rd_ptr = (rd_ptr + EVB) % buf_size;      // software frees one event
    cyc = 0;
    while (!trace_done && cyc < 2000) begin @(negedge clk); cyc++; end
    check(trace_done, "event proceeds after space is freed");
    @(negedge clk); trace_valid = 0;
    check_event(exp_wr);
    exp_wr = (exp_wr + EVB) % buf_size;
    check(wr_ptr == exp_wr, "wr_ptr after the stalled event");
    rd_ptr = wr_ptr;
    // phase 3: random back-pressure on the memory port, odd buffer size
    ready_pct = 40;
    buf_size = 32'd1536;
    cancel = 1; @(negedge clk); cancel = 0;
    rd_ptr = wr_ptr;
    exp_wr = wr_ptr;
    for (int e = 0; e < 8; e++) begin
      one_event(cyc);
      check(cyc > 386, "back-pressure slows the transfer");
      check_event(exp_wr);
      exp_wr = (exp_wr + EVB >= buf_size) ? 0 : exp_wr + EVB;
      if (exp_wr == 0) n_wrap++;
      @(negedge clk);
      check(wr_ptr == exp_wr, $sformatf("wr_ptr %0d expected %0d", wr_ptr, exp_wr));
      rd_ptr = wr_ptr;
    end
    check(n_wrap >= 2 && n_stall == 1, "buffer wrapped and stalled");
    $display("wraps=%0d stalls=%0d", n_wrap, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
