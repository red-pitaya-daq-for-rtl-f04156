// tb_daq_regs -- register map test on the system bus.
//
// Reads every register after reset and compares with the reset values of
// the map, writes random values to every read/write register and reads them
// back (thresholds sign-extended, fields truncated to their widths), checks
// that the control pulses (arm, cancel, software trigger) last one cycle,
// that status inputs appear at their offsets, that writes to read-only
// registers change nothing, and that unmapped addresses answer with sys_err.
module tb_daq_regs;
  import daq_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] sys_addr = '0, sys_wdata = '0, sys_rdata;
  logic sys_wen = 0, sys_ren = 0, sys_err, sys_ack;
  logic arm, cancel, sw_trig, continuous;
  logic [3:0] trig_src;
  logic signed [13:0] thr [2];
  logic [13:0] hyst [2];
  logic [7:0] post_len;
  logic [31:0] buf_base, buf_size, rd_ptr;
  acq_state_e acq_state = ACQ_IDLE;
  logic [31:0] wr_ptr = 32'h0000_0A00, event_count = 32'd77, full_stalls = 32'd5;
  logic dma_busy = 0, dma_waiting = 0;
  int checks = 0, failures = 0;
  int n_arm = 0, n_cancel = 0, n_sw = 0;

  daq_regs dut (.*);

  always #4 clk = ~clk;

  always @(posedge clk) begin
    n_arm += int'(arm); n_cancel += int'(cancel); n_sw += int'(sw_trig);
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic bus_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); sys_addr = a; sys_wdata = d; sys_wen = 1;
    @(negedge clk); sys_wen = 0;
    check(sys_ack && !sys_err, $sformatf("write ack at %h", a));
  endtask

  task automatic bus_read(logic [31:0] a, output logic [31:0] d, output logic err);
    @(negedge clk); sys_addr = a; sys_ren = 1;
    @(negedge clk); sys_ren = 0;
    check(sys_ack, $sformatf("read ack at %h", a));
    d = sys_rdata; err = sys_err;
  endtask

  task automatic expect_reg(logic [31:0] a, logic [31:0] v);
    logic [31:0] d; logic e;
    bus_read(a, d, e);
    check(!e && d == v, $sformatf("reg %h = %h, expected %h", a, d, v));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; logic e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values
    expect_reg(32'h00, 0);
    expect_reg(32'h04, 0);
    expect_reg(32'h08, 0);
    expect_reg(32'h0C, 0);
    expect_reg(32'h10, 112);
    expect_reg(32'h20, 20);
    expect_reg(32'h24, 20);
    expect_reg(32'h100, 0);
    expect_reg(32'h104, 32'h0010_0000);
    expect_reg(32'h108, 0);
    expect_reg(32'h10C, 32'h0A00);
    expect_reg(32'h110, 77);
    expect_reg(32'h114, 5);
    // read/write registers
    for (int r = 0; r < 20; r++) begin
      logic [31:0] v;
      v = $urandom;
      bus_write(32'h08, v); expect_reg(32'h08, 32'($signed(v[13:0])));
      check(thr[0] == v[13:0], "THR_A drives channel A");
      v = $urandom;
      bus_write(32'h0C, v); expect_reg(32'h0C, 32'($signed(v[13:0])));
      check(thr[1] == v[13:0], "THR_B drives channel B");
      v = $urandom;
      bus_write(32'h20, v); expect_reg(32'h20, {18'd0, v[13:0]});
      check(hyst[0] == v[13:0], "HYST_A");
      v = $urandom;
      bus_write(32'h24, v); expect_reg(32'h24, {18'd0, v[13:0]});
      check(hyst[1] == v[13:0], "HYST_B");
      v = $urandom;
      bus_write(32'h04, v); expect_reg(32'h04, {28'd0, v[3:0]});
      check(trig_src == v[3:0], "TRIG_SRC");
      v = $urandom;
      bus_write(32'h10, v); expect_reg(32'h10, {24'd0, v[7:0]});
      check(post_len == v[7:0], "POST_DELAY");
      v = $urandom;
      bus_write(32'h100, v); expect_reg(32'h100, v); check(buf_base == v, "BUF_BASE");
      v = $urandom;
      bus_write(32'h104, v); expect_reg(32'h104, v); check(buf_size == v, "BUF_SIZE");
      v = $urandom;
      bus_write(32'h108, v); expect_reg(32'h108, v); check(rd_ptr == v, "RD_PTR");
    end
    // read-only registers ignore writes
    bus_write(32'h10C, 32'h1234); expect_reg(32'h10C, 32'h0A00);
    bus_write(32'h110, 32'h1234); expect_reg(32'h110, 77);
    // control pulses
    n_arm = 0; n_cancel = 0; n_sw = 0;
    bus_write(32'h00, 32'h19);                // arm, continuous, software trigger
    repeat (3) @(negedge clk);
    check(n_arm == 1 && n_sw == 1 && n_cancel == 0, $sformatf("pulses arm=%0d sw=%0d", n_arm, n_sw));
    check(continuous, "continuous stored");
    bus_write(32'h00, 32'h02);                // cancel, continuous off
    repeat (3) @(negedge clk);
    check(n_cancel == 1 && !continuous, "cancel pulse, continuous cleared");
    // status
    acq_state = ACQ_ARMED; expect_reg(32'h00, 32'h1);
    acq_state = ACQ_HOLD;  expect_reg(32'h00, 32'h4);
    dma_busy = 1; dma_waiting = 1;
    expect_reg(32'h118, {26'd0, 1'b1, 1'b1, 1'b0, 3'(ACQ_HOLD)});
    // unmapped
    bus_read(32'h014, d, e);  check(e, "unmapped read errors");
    bus_read(32'h200, d, e);  check(e, "unmapped read errors");
    @(negedge clk); sys_addr = 32'h0FC; sys_wen = 1; @(negedge clk); sys_wen = 0;
    check(sys_ack && sys_err, "unmapped write errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
