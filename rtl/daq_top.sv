// daq_top -- dual-channel trigger-and-capture firmware for the SiPM fast-neutron
// detector.
//
// Two ADC channels (14 bit, 125 MS/s) carry the two SiPM readout chains of one
// scintillator: A, the high-sensitivity channel, and B, the high-dynamic-range
// channel. The firmware keeps only triggered events. Each channel has a
// threshold crossing detector (threshold_trigger); trigger_select picks one of
// them, or the software trigger, as the single common trigger. acq_controller
// records both channels into 128-sample ring buffers (trace_buffer) at one
// shared write address and freezes them together on that trigger, so every
// event is a time-aligned pair of 1024 ns traces. dma_writer copies the frozen
// pair into a circular buffer in DDR memory, from which the ARM software reads
// it, and signals the software through 'irq'. daq_regs holds the
// configuration and status on the system bus.
//
// Data path timing: ADC samples are registered once on entry (adc_q). The
// crossing detectors look at adc_q and answer one cycle later, so the ring
// buffers are written with adc_q delayed by one more cycle (adc_qq). The
// sample that crossed the threshold is thus written in the trigger cycle and
// lands at trace index 128 - POST_DELAY (16 by default).
//
// Follows the system description: two channels, 14-bit samples, 128-sample
// traces, threshold triggering, both channels captured on the same trigger,
// DMA into a circular DDR buffer, registers in the Red Pitaya layout. This
// design's own: the crossing rule and hysteresis, pre-trigger handling, the
// event format in memory, the buffer-full rule, the DMA/counter registers, the
// either-channel trigger sources and 'irq'.
//
// Ports: adc_a/adc_b two's-complement samples; sys_* the Red Pitaya system bus
// (see daq_regs); m_* a 64-bit valid/ready write port towards DDR (see
// dma_writer); irq a one-cycle pulse per stored event.
module daq_top
#(
  parameter int unsigned TRACE_LEN = daq_pkg::TRACE_LEN,
  parameter int unsigned ADC_W     = daq_pkg::ADC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [ADC_W-1:0] adc_a,
  input  logic signed [ADC_W-1:0] adc_b,
  input  logic [31:0]             sys_addr,
  input  logic [31:0]             sys_wdata,
  input  logic                    sys_wen,
  input  logic                    sys_ren,
  output logic [31:0]             sys_rdata,
  output logic                    sys_err,
  output logic                    sys_ack,
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic [daq_pkg::MEM_AW-1:0] m_addr,
  output logic [daq_pkg::MEM_DW-1:0] m_data,
  output logic                    irq
);

  import daq_pkg::*;

  // The rings wrap by address overflow and the DMA packs four samples a word.
  if ((TRACE_LEN & (TRACE_LEN - 1)) != 0 || TRACE_LEN % 4 != 0)
  begin : g_bad_trace_len
    $error("TRACE_LEN must be a power of two and a multiple of 4");
  end

  localparam int unsigned RAW = $clog2(TRACE_LEN);
  localparam int unsigned LW  = $clog2(TRACE_LEN + 1);

  logic signed [ADC_W-1:0] adc_q  [NCH];
  logic signed [ADC_W-1:0] adc_qq [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_q  <= '{default: '0};
      adc_qq <= '{default: '0};
    end else begin
      adc_q[0] <= adc_a;
      adc_q[1] <= adc_b;
      adc_qq   <= adc_q;
    end
  end

  // configuration
  logic                    arm, cancel, sw_trig, continuous;
  logic [3:0]              trig_src;
  logic signed [ADC_W-1:0] thr  [NCH];
  logic [ADC_W-1:0]        hyst [NCH];
  logic [LW-1:0]           post_len;
  logic [MEM_AW-1:0]       buf_base, buf_size, rd_ptr, wr_ptr;

  // trigger path
  logic [NCH-1:0] rise, fall;
  logic           trig;

  // recorder and DMA
  acq_state_e        acq_state;
  logic              wr_en, trace_valid, trace_done;
  logic [RAW-1:0]    wr_ptr_ring, trace_start, rd_addr;
  logic [ADC_W-1:0]  rd_data [NCH];
  logic              dma_busy, dma_waiting;
  logic [31:0]       event_count, full_stalls;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    threshold_trigger #(.ADC_W(ADC_W)) u_trig (
      .clk, .rst_n,
      .sample    (adc_q[c]),
      .threshold (thr[c]),
      .hysteresis(hyst[c]),
      .rise      (rise[c]),
      .fall      (fall[c])
    );

    trace_buffer #(.DEPTH(TRACE_LEN), .ADC_W(ADC_W)) u_buf (
      .clk,
      .we   (wr_en),
      .waddr(wr_ptr_ring),
      .wdata(adc_qq[c]),
      .raddr(rd_addr),
      .rdata(rd_data[c])
    );
  end

  trigger_select #(.NCH(NCH)) u_sel (
    .src(trig_src), .sw_trig, .rise, .fall, .trig
  );

  acq_controller #(.TRACE_LEN(TRACE_LEN)) u_acq (
    .clk, .rst_n, .arm, .cancel, .continuous, .post_len, .trig,
    .wr_en, .wr_ptr(wr_ptr_ring), .trace_valid, .trace_start, .trace_done,
    .state(acq_state)
  );

  dma_writer #(.TRACE_LEN(TRACE_LEN), .ADC_W(ADC_W)) u_dma (
    .clk, .rst_n, .cancel, .buf_base, .buf_size, .rd_ptr, .wr_ptr,
    .trace_valid, .trace_start, .trace_done, .rd_addr, .rd_data,
    .m_valid, .m_ready, .m_addr, .m_data,
    .busy(dma_busy), .waiting_full(dma_waiting), .event_count, .full_stalls
  );

  daq_regs #(.TRACE_LEN(TRACE_LEN), .ADC_W(ADC_W)) u_regs (
    .clk, .rst_n, .sys_addr, .sys_wdata, .sys_wen, .sys_ren, .sys_rdata, .sys_err, .sys_ack,
    .arm, .cancel, .sw_trig, .continuous, .trig_src, .thr, .hyst, .post_len,
    .buf_base, .buf_size, .rd_ptr,
    .acq_state, .wr_ptr, .event_count, .full_stalls,
    .dma_busy, .dma_waiting
  );

  assign irq = trace_done;

endmodule
