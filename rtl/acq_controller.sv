// acq_controller -- arming, pre-/post-trigger recording and hand-off of one
// dual-channel trace.
//
// Both channel ring buffers (trace_buffer) share the write address produced
// here, so one trigger freezes the two channels at the same sample. After
// 'arm' the controller records continuously. It first writes the pre-trigger
// history (TRACE_LEN - post_len samples, state FILL), ignoring triggers, so
// every trace starts with valid samples. Then it waits for the common trigger
// (ARMED). The sample written in the trigger cycle becomes trace index
// TRACE_LEN - post_len. post_len samples, the trigger sample included, are
// recorded (POST), and then writing stops (HOLD) and 'trace_valid' offers the
// frozen trace to the DMA, with 'trace_start' the ring address of its oldest
// sample. When the DMA reports 'trace_done' the controller re-arms by itself
// in continuous mode or returns to IDLE. Triggers during POST and HOLD are
// ignored: that is the hardware share of the dead time. 'cancel' returns to
// IDLE from any state.
//
// The 128-sample trace and the simultaneous capture of both channels come
// from the system description. The pre-trigger fill, the post_len setting
// (the Red Pitaya "delay after trigger"), continuous re-arming and cancel are
// this design's choices.
//
// Timing: post_len is sampled on 'arm' and clamped to 1..TRACE_LEN. The trace
// is offered one cycle after its last sample was written. A trace that
// arrives with no DMA back-pressure occupies the recorder for post_len cycles
// plus the DMA copy time.
module acq_controller
#(
  parameter int unsigned TRACE_LEN = daq_pkg::TRACE_LEN,
  localparam int unsigned AW = $clog2(TRACE_LEN),
  localparam int unsigned LW = $clog2(TRACE_LEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm,
  input  logic          cancel,
  input  logic          continuous,
  input  logic [LW-1:0] post_len,
  input  logic          trig,
  output logic          wr_en,
  output logic [AW-1:0] wr_ptr,
  output logic          trace_valid,
  output logic [AW-1:0] trace_start,
  input  logic          trace_done,
  output daq_pkg::acq_state_e state
);

  import daq_pkg::*;

  logic [LW-1:0] post_q;     // latched post-trigger length
  logic [LW-1:0] cnt;        // samples left in FILL or POST
  logic [LW-1:0] pre_len;

  assign pre_len = LW'(TRACE_LEN) - post_q;

  assign wr_en         = (state == ACQ_FILL) || (state == ACQ_ARMED) || (state == ACQ_POST);
  assign trace_valid   = (state == ACQ_HOLD);

  function automatic logic [LW-1:0] clamp_len(logic [LW-1:0] v);
    if (v == '0)                 return LW'(1);
    else if (v > LW'(TRACE_LEN)) return LW'(TRACE_LEN);
    else                         return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ACQ_IDLE;
      wr_ptr      <= '0;
      trace_start <= '0;
      post_q      <= LW'(TRACE_LEN - PRE_LEN_DEFAULT);
      cnt         <= '0;
    end else if (cancel) begin
      state <= ACQ_IDLE;
    end else begin
      if (wr_en) wr_ptr <= wr_ptr + AW'(1);
      unique case (state)
        ACQ_IDLE: if (arm) begin
          post_q <= clamp_len(post_len);
          cnt    <= LW'(TRACE_LEN) - clamp_len(post_len);
          state  <= (clamp_len(post_len) == LW'(TRACE_LEN)) ? ACQ_ARMED : ACQ_FILL;
        end
        ACQ_FILL: begin
          cnt <= cnt - LW'(1);
          if (cnt == LW'(1)) state <= ACQ_ARMED;
        end
        ACQ_ARMED: if (trig) begin
          trace_start <= wr_ptr - AW'(pre_len);
          cnt         <= post_q - LW'(1);
          state       <= (post_q == LW'(1)) ? ACQ_HOLD : ACQ_POST;
        end
        ACQ_POST: begin
          cnt <= cnt - LW'(1);
          if (cnt == LW'(1)) state <= ACQ_HOLD;
        end
        ACQ_HOLD: if (trace_done) begin
          if (continuous) begin
            cnt   <= pre_len;
            state <= (pre_len == '0) ? ACQ_ARMED : ACQ_FILL;
          end else begin
            state <= ACQ_IDLE;
          end
        end
        default: state <= ACQ_IDLE;
      endcase
    end
  end

  // The DMA may only finish a trace that is being offered.
  a_done_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                   trace_done |-> state == ACQ_HOLD);

endmodule
