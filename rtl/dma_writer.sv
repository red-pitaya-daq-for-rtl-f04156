// dma_writer -- copies each frozen dual-channel trace into a circular event
// buffer in DDR memory.
//
// The ARM software reads events from a circular buffer in DDR; only triggered
// traces are written there. This block is the write side of that buffer.
// When the recorder offers a trace it first checks the space: the software
// reports how far it has read through 'rd_ptr' (a byte offset), the block
// keeps its own 'wr_ptr', and an event is written only if more than one
// event's worth of bytes is free, so wr_ptr == rd_ptr always means empty. If
// the buffer is too full the trace is held (and the recorder stays dead) until
// the software frees space; each event that had to wait counts once in
// 'full_stalls'. It then reads channel A's samples oldest first, then channel
// B's, from the two ring buffers, sign-extends them to 16 bits, packs four per
// 64-bit word (lowest index in the low bits) and writes the 64 words to
// buf_base + wr_ptr onward. Finally wr_ptr advances by 512 bytes, wrapping to
// 0 at buf_size, and 'trace_done' releases the recorder. buf_size must be a
// non-zero multiple of 512, so an event never straddles the end.
//
// The circular DDR buffer and the DMA come from the system description; the
// event layout, the full rule and the word port are this design's choices.
// The memory port is a plain valid/ready word port standing in for the Zynq
// high-performance AXI port: m_addr and m_data hold while m_valid waits for
// m_ready.
//
// Timing: the ring buffers have one cycle read latency. Each word takes five
// cycles to gather plus one or more to write, so with m_ready always high an
// event takes 2 + 6*64 = 386 cycles from trace_valid to trace_done
// (about 3.1 us at 125 MHz).
module dma_writer
#(
  parameter int unsigned TRACE_LEN = daq_pkg::TRACE_LEN,
  parameter int unsigned ADC_W     = daq_pkg::ADC_W,
  parameter int unsigned AW        = daq_pkg::MEM_AW,
  parameter int unsigned DW        = daq_pkg::MEM_DW,
  localparam int unsigned RAW   = $clog2(TRACE_LEN),
  localparam int unsigned LANES = DW / daq_pkg::SAMPLE_W,            // samples per word
  localparam int unsigned WPC   = TRACE_LEN / LANES,         // words per channel
  localparam int unsigned EVB   = daq_pkg::NCH * TRACE_LEN * daq_pkg::SAMPLE_W / 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cancel,
  // buffer configuration and software read position
  input  logic [AW-1:0]        buf_base,
  input  logic [AW-1:0]        buf_size,
  input  logic [AW-1:0]        rd_ptr,
  output logic [AW-1:0]        wr_ptr,
  // trace hand-off from the recorder
  input  logic                 trace_valid,
  input  logic [RAW-1:0]       trace_start,
  output logic                 trace_done,
  // read port on both ring buffers
  output logic [RAW-1:0]       rd_addr,
  input  logic [ADC_W-1:0]     rd_data [daq_pkg::NCH],
  // memory write port
  output logic                 m_valid,
  input  logic                 m_ready,
  output logic [AW-1:0]        m_addr,
  output logic [DW-1:0]        m_data,
  // status
  output logic                 busy,
  output logic                 waiting_full,
  output logic [31:0]          event_count,
  output logic [31:0]          full_stalls
);

  import daq_pkg::*;

  typedef enum logic [2:0] {D_IDLE, D_CHECK, D_GATHER, D_WRITE, D_DONE} dstate_e;
  dstate_e st;

  logic [RAW-1:0]               pos;      // next sample index to read (trace order)
  logic [$clog2(LANES+1)-1:0]   issued;   // reads issued for the current word
  logic [$clog2(LANES)-1:0]     lane;     // next lane to fill
  logic                         rvalid;   // rd_data belongs to a read issued last cycle
  logic [$clog2(NCH)-1:0]       ch;
  logic [$clog2(NCH*WPC)-1:0]   widx;     // word index within the event
  logic [AW-1:0]                used;
  logic                         fits;
  logic                         stalled;  // this event already counted as a stall

  assign rd_addr = trace_start + pos;

  always_comb begin
    used = (wr_ptr >= rd_ptr) ? (wr_ptr - rd_ptr) : (wr_ptr + buf_size - rd_ptr);
    fits = (used + AW'(EVB)) < buf_size;
  end

  assign m_valid      = (st == D_WRITE);
  assign m_addr       = buf_base + wr_ptr + AW'({widx, 3'b000});
  assign trace_done   = (st == D_DONE);
  assign busy         = (st != D_IDLE);
  assign waiting_full = (st == D_CHECK) && !fits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= D_IDLE;
      pos         <= '0;
      issued      <= '0;
      lane        <= '0;
      rvalid      <= 1'b0;
      ch          <= '0;
      widx        <= '0;
      wr_ptr      <= '0;
      m_data      <= '0;
      stalled     <= 1'b0;
      event_count <= '0;
      full_stalls <= '0;
    end else if (cancel) begin
      st     <= D_IDLE;
      rvalid <= 1'b0;
    end else begin
      unique case (st)
        D_IDLE: if (trace_valid) begin
          st      <= D_CHECK;
          stalled <= 1'b0;
        end
        D_CHECK: begin
          if (fits) begin
            st     <= D_GATHER;
            pos    <= '0;
            ch     <= '0;
            widx   <= '0;
            issued <= '0;
            lane   <= '0;
            rvalid <= 1'b0;
          end else if (!stalled) begin
            stalled     <= 1'b1;
            full_stalls <= full_stalls + 32'd1;
          end
        end
        D_GATHER: begin
          if (issued != ($clog2(LANES+1))'(LANES)) begin
            pos    <= pos + RAW'(1);
            issued <= issued + 1'b1;
            rvalid <= 1'b1;
          end else begin
            rvalid <= 1'b0;
          end
          if (rvalid) begin
            m_data[SAMPLE_W*lane +: SAMPLE_W] <= SAMPLE_W'($signed(rd_data[ch]));
            lane <= lane + 1'b1;
            if (lane == ($clog2(LANES))'(LANES-1)) st <= D_WRITE;
          end
        end
        D_WRITE: if (m_ready) begin
          issued <= '0;
          lane   <= '0;
          rvalid <= 1'b0;
          widx   <= widx + 1'b1;
          if (widx == ($clog2(NCH*WPC))'(NCH*WPC-1)) begin
            st <= D_DONE;
          end else begin
            st <= D_GATHER;
            if (widx[$clog2(WPC)-1:0] == ($clog2(WPC))'(WPC-1)) begin
              ch  <= ch + 1'b1;     // next channel starts at its oldest sample
              pos <= '0;
            end
          end
        end
        D_DONE: begin
          st          <= D_IDLE;
          event_count <= event_count + 32'd1;
          wr_ptr      <= (wr_ptr + AW'(EVB) >= buf_size) ? '0 : wr_ptr + AW'(EVB);
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  // Memory handshake: a pending write holds its address and data.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || cancel)
                           m_valid && !m_ready |=> m_valid && $stable(m_addr) && $stable(m_data));

endmodule
