// ddr_model -- behavioural stand-in for the DDR memory behind the DMA write
// port, for simulation only.
//
// Accepts 64-bit writes on a valid/ready port and stores them in a sparse
// array indexed by byte address. 'ready' is withdrawn at random in
// 100 - ready_pct percent of the cycles (READY_PCT at start) to exercise back-pressure. Counts the
// words written and flags misaligned addresses. 'mem' and 'words' are read by
// the testbenches through hierarchical references.
module ddr_model #(
  parameter int READY_PCT = 100
) (
  input  logic        clk,
  input  logic        m_valid,
  output logic        m_ready,
  input  logic [31:0] m_addr,
  input  logic [63:0] m_data
);
  logic [63:0] mem [longint unsigned];
  int words = 0;
  int ready_pct = READY_PCT;   // may be changed at run time
  int misaligned = 0;

  initial m_ready = 1'b1;

  always @(posedge clk) begin
    if (m_valid && m_ready) begin
      mem[longint'(m_addr)] = m_data;
      words++;
      if (m_addr[2:0] != 3'd0) misaligned++;
    end
    m_ready <= ($urandom_range(0, 99) < ready_pct);
  end

  function automatic logic [63:0] peek(longint unsigned addr);
    if (mem.exists(addr)) return mem[addr];
    return 64'hDEAD_DEAD_DEAD_DEAD;
  endfunction
endmodule
