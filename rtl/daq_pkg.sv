// daq_pkg -- constants and types shared by the dual-channel trigger-and-capture
// firmware.
//
// The numbers that describe the acquisition come from the detector system:
// two ADC channels (one per SiPM readout chain), 14-bit samples at 125 MS/s
// (8 ns per sample) and traces of 128 samples (1024 ns). The memory format
// (16-bit sign-extended samples, 64-bit memory words, 512-byte events) and the
// trigger-source codes are choices of this design. Codes 1..5 keep the
// numbering of the Red Pitaya oscilloscope trigger-source register; 10 and 11
// (trigger on either channel) are added here.
package daq_pkg;

  localparam int unsigned ADC_W     = 14;   // ADC resolution
  localparam int unsigned TRACE_LEN = 128;  // samples per trace and channel
  localparam int unsigned NCH       = 2;    // readout channels (A: 6050HS, B: 3010PS)
  localparam int unsigned SAMPLE_W  = 16;   // sample width in memory (sign-extended)
  localparam int unsigned MEM_DW    = 64;   // memory write port width
  localparam int unsigned MEM_AW    = 32;   // memory byte address width

  // Default number of samples kept before the trigger sample; the default
  // post-trigger length is the trace length minus this (112 of 128).
  localparam int unsigned PRE_LEN_DEFAULT = 16;

  typedef logic signed [ADC_W-1:0] sample_t;

  typedef enum logic [3:0] {
    TRIG_NONE   = 4'd0,   // trigger disabled
    TRIG_NOW    = 4'd1,   // software trigger: fires on sw_trig
    TRIG_A_RISE = 4'd2,
    TRIG_A_FALL = 4'd3,
    TRIG_B_RISE = 4'd4,
    TRIG_B_FALL = 4'd5,
    TRIG_ANY_RISE = 4'd10, // either channel crosses upwards
    TRIG_ANY_FALL = 4'd11  // either channel crosses downwards
  } trig_src_e;

  typedef enum logic [2:0] {
    ACQ_IDLE,     // nothing recorded, waiting for arm
    ACQ_FILL,     // recording the pre-trigger history, trigger ignored
    ACQ_ARMED,    // recording, waiting for a trigger
    ACQ_POST,     // recording the samples after the trigger
    ACQ_HOLD      // trace frozen, DMA copying it out
  } acq_state_e;

endpackage
