// tb_trace_buffer -- ring memory write/read test.
//
// Fills the 128-entry memory with random samples, then keeps writing one new
// sample per cycle (wrapping the address) while reading a random address in
// the same cycles, and compares every read, one cycle after its address, with
// a shadow copy kept here. A read of the address being written returns the
// old contents (read-before-write), which the shadow model also follows.
module tb_trace_buffer;
  localparam int DEPTH = 128, ADC_W = 14, AW = 7;
  logic clk = 1'b0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [ADC_W-1:0] wdata, rdata;
  logic [ADC_W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  trace_buffer #(.DEPTH(DEPTH), .ADC_W(ADC_W)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ADC_W-1:0] exp_q;
    we = 1'b1; raddr = '0;
    for (int i = 0; i < DEPTH; i++) begin
      waddr = AW'(i); wdata = ADC_W'($urandom);
      shadow[i] = wdata;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 4000; i++) begin
      we    = ($urandom_range(0, 3) != 0);
      waddr = AW'(i);
      wdata = ADC_W'($urandom);
      raddr = (i % 7 == 0) ? waddr : AW'($urandom);
      exp_q = shadow[raddr];
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("read %0d: got %h expected %h", raddr, rdata, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
