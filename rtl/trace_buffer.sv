// trace_buffer -- ring memory holding the latest trace of one ADC channel.
//
// While the recorder runs, one sample is written per clock at an address that
// advances modulo DEPTH, so the memory always holds the last DEPTH samples.
// When the recorder freezes after a trigger, the memory holds exactly one
// trace (DEPTH = 128 samples, 1024 ns at 125 MS/s) with the trigger at a fixed
// position, and the DMA reads it out. One instance per channel, both driven by
// the same write address so the two traces stay aligned.
//
// Interface and timing: one write port (we, waddr, wdata) and one read port;
// rdata is the word at raddr registered, one clock after raddr (block RAM).
// The depth is the trace length of the system; the RAM style is this design's
// choice.
module trace_buffer #(
  parameter int unsigned DEPTH = daq_pkg::TRACE_LEN,
  parameter int unsigned ADC_W = daq_pkg::ADC_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ADC_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [ADC_W-1:0] rdata
);

  logic [ADC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
