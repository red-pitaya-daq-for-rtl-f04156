// daq_regs -- memory-mapped control and status registers on the Red Pitaya
// system bus.
//
// The acquisition software configures the firmware and follows the circular
// buffer through these registers. The first group keeps the offsets and
// meanings of the Red Pitaya oscilloscope register block (v0.94 map), which
// the original software was written against; the DMA and counter group at
// 0x100 is this design's own.
//
//   0x00 CONFIG     W: bit0 arm (pulse), bit1 cancel (pulse), bit3 continuous
//                      (stored), bit4 software trigger (pulse, source 1 only)
//                   R: bit0 armed (FILL or ARMED), bit2 triggered (POST or
//                      HOLD), bit3 continuous
//   0x04 TRIG_SRC   trigger source code, daq_pkg::trig_src_e         (0)
//   0x08 THR_A      channel A threshold, 14-bit two's complement    (0)
//   0x0C THR_B      channel B threshold                              (0)
//   0x10 POST_DELAY samples recorded from the trigger on, 1..128     (112)
//   0x20 HYST_A     channel A hysteresis, 14 bits unsigned           (20)
//   0x24 HYST_B     channel B hysteresis                             (20)
//   0x100 BUF_BASE  byte address of the circular buffer              (0)
//   0x104 BUF_SIZE  buffer size in bytes, multiple of 512            (1 MiB)
//   0x108 RD_PTR    byte offset software has consumed up to          (0)
//   0x10C WR_PTR    R: byte offset of the next event
//   0x110 EVENTS    R: events stored since reset
//   0x114 STALLS    R: events that waited for buffer space
//   0x118 STATUS    R: bits2:0 recorder state, bit4 DMA busy, bit5 DMA
//                      waiting for space
// Reset values in parentheses are this design's choice. Reads of
// thresholds return them sign-extended.
//
// Bus timing: sys_wen / sys_ren are one-cycle strobes with sys_addr and
// sys_wdata valid with them. sys_ack and sys_rdata follow one cycle later;
// sys_err is raised with sys_ack for an address outside the map. Only the low
// 12 address bits are decoded. Pulse outputs are high for the cycle after the
// write strobe.
module daq_regs
#(
  parameter int unsigned TRACE_LEN = daq_pkg::TRACE_LEN,
  parameter int unsigned ADC_W     = daq_pkg::ADC_W,
  parameter int unsigned AW        = daq_pkg::MEM_AW,
  parameter logic [AW-1:0] BUF_SIZE_RESET = AW'(1 << 20),
  localparam int unsigned LW = $clog2(TRACE_LEN + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // system bus
  input  logic [31:0]             sys_addr,
  input  logic [31:0]             sys_wdata,
  input  logic                    sys_wen,
  input  logic                    sys_ren,
  output logic [31:0]             sys_rdata,
  output logic                    sys_err,
  output logic                    sys_ack,
  // control
  output logic                    arm,
  output logic                    cancel,
  output logic                    sw_trig,
  output logic                    continuous,
  output logic [3:0]              trig_src,
  output logic signed [ADC_W-1:0] thr [daq_pkg::NCH],
  output logic [ADC_W-1:0]        hyst [daq_pkg::NCH],
  output logic [LW-1:0]           post_len,
  output logic [AW-1:0]           buf_base,
  output logic [AW-1:0]           buf_size,
  output logic [AW-1:0]           rd_ptr,
  // status
  input  daq_pkg::acq_state_e              acq_state,
  input  logic [AW-1:0]           wr_ptr,
  input  logic [31:0]             event_count,
  input  logic [31:0]             full_stalls,
  input  logic                    dma_busy,
  input  logic                    dma_waiting
);

  import daq_pkg::*;

  logic [11:0] a;
  logic        hit;
  logic [31:0] rd;

  assign a = sys_addr[11:0];

  // Address decode and read mux.
  always_comb begin
    hit = 1'b1;
    rd  = '0;
    unique case (a)
      12'h000: rd = {28'd0, continuous,
                     (acq_state == ACQ_POST) || (acq_state == ACQ_HOLD), 1'b0,
                     (acq_state == ACQ_FILL) || (acq_state == ACQ_ARMED)};
      12'h004: rd = {28'd0, trig_src};
      12'h008: rd = 32'($signed(thr[0]));
      12'h00C: rd = 32'($signed(thr[1]));
      12'h010: rd = 32'(post_len);
      12'h020: rd = 32'(hyst[0]);
      12'h024: rd = 32'(hyst[1]);
      12'h100: rd = 32'(buf_base);
      12'h104: rd = 32'(buf_size);
      12'h108: rd = 32'(rd_ptr);
      12'h10C: rd = 32'(wr_ptr);
      12'h110: rd = event_count;
      12'h114: rd = full_stalls;
      12'h118: rd = {26'd0, dma_waiting, dma_busy, 1'b0, acq_state};
      default: hit = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sys_ack    <= 1'b0;
      sys_err    <= 1'b0;
      sys_rdata  <= '0;
      arm        <= 1'b0;
      cancel      <= 1'b0;
      sw_trig    <= 1'b0;
      continuous <= 1'b0;
      trig_src   <= TRIG_NONE;
      thr[0]     <= '0;
      thr[1]     <= '0;
      hyst[0]    <= ADC_W'(20);
      hyst[1]    <= ADC_W'(20);
      post_len   <= LW'(TRACE_LEN - PRE_LEN_DEFAULT);
      buf_base   <= '0;
      buf_size   <= BUF_SIZE_RESET;
      rd_ptr     <= '0;
    end else begin
      sys_ack   <= sys_wen || sys_ren;
      sys_err   <= (sys_wen || sys_ren) && !hit;
      sys_rdata <= sys_ren ? rd : '0;
      arm       <= 1'b0;
      cancel     <= 1'b0;
      sw_trig   <= 1'b0;
      if (sys_wen) begin
        unique case (a)
          12'h000: begin
            arm        <= sys_wdata[0];
            cancel      <= sys_wdata[1];
            continuous <= sys_wdata[3];
            sw_trig    <= sys_wdata[4];
          end
          12'h004: trig_src <= sys_wdata[3:0];
          12'h008: thr[0]   <= sys_wdata[ADC_W-1:0];
          12'h00C: thr[1]   <= sys_wdata[ADC_W-1:0];
          12'h010: post_len <= sys_wdata[LW-1:0];
          12'h020: hyst[0]  <= sys_wdata[ADC_W-1:0];
          12'h024: hyst[1]  <= sys_wdata[ADC_W-1:0];
          12'h100: buf_base <= sys_wdata[AW-1:0];
          12'h104: buf_size <= sys_wdata[AW-1:0];
          12'h108: rd_ptr   <= sys_wdata[AW-1:0];
          default: ;   // read-only or unmapped: ignored (unmapped acks with sys_err)
        endcase
      end
    end
  end

  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n) !(sys_wen && sys_ren));

endmodule
