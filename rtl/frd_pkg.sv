// frd_pkg: types and constants shared by the flux-ramp demodulator and the
// event detector.
//
// The numbers that follow the published design are the channel count (32
// TDM channels), the 16-bit NCO address and amplitude, the eight event slots
// (five needed, rounded up to a power of two), the four-sample moving-average
// window and the 256-sample pre-trigger buffer. Everything else here (word
// widths, the descriptor layout, the configuration select codes) is this
// implementation's own choice.
package frd_pkg;

  // ---- global sizes -------------------------------------------------------
  localparam int unsigned CHANNELS     = 32;   // TDM channels per module
  localparam int unsigned CH_W         = $clog2(CHANNELS);
  localparam int unsigned IQ_W         = 16;   // I/Q envelope input width
  localparam int unsigned S_W          = 17;   // signed signal into the pre-adder
  localparam int unsigned NCO_ADDR_W   = 16;   // DDS phase (table address) width
  localparam int unsigned NCO_AMP_W    = 16;   // DDS amplitude width
  localparam int unsigned NCO_ACC_W    = 32;   // per-channel phase accumulator
  localparam int unsigned CORR_ACC_W   = 48;   // correlation accumulator (DSP48E2 P width)
  localparam int unsigned TRUNC_W      = 24;   // width after truncation, into arctan
  localparam int unsigned PHASE_W      = 16;   // demodulated phase, 2^16 = 2*pi
  localparam int unsigned RAMP_W       = 16;   // ramp length / offsets counters
  localparam int unsigned WIN_DEPTH    = 1024; // maximum ramp length with window
  localparam int unsigned WIN_W        = 16;   // window coefficient, unsigned Q1.15

  localparam int unsigned SAMPLE_W     = PHASE_W;       // event detector sample
  localparam int unsigned MAW_LEN      = 4;             // moving-average window
  localparam int unsigned TRIG_W       = SAMPLE_W + 3;  // trigger signal width
  localparam int unsigned PRETRIG_MAX  = 256;           // pre-trigger frames
  localparam int unsigned SLOTS        = 8;             // event slots (N)
  localparam int unsigned SLOT_W       = $clog2(SLOTS);
  localparam int unsigned SLOT_DEPTH   = 512;           // samples per slot
  localparam int unsigned LEN_W        = 16;            // event length field
  localparam int unsigned TS_W         = 48;            // timestamp width
  localparam int unsigned AXIS_W       = 32;            // DMA stream word

  // ---- demodulator configuration port select codes -------------------------
  typedef enum logic [2:0] {
    CFG_PHASE_INC = 3'd0,  // idx = channel, data = phase increment f_r/f_s*2^32
    CFG_OFFSET    = 3'd1,  // idx = channel, data = DC offset (signed S_W)
    CFG_SINE_LUT  = 3'd2,  // idx = table address, data = amplitude
    CFG_WINDOW    = 3'd3,  // idx = sample in ramp, data = window coefficient
    CFG_RAMP_LEN  = 3'd4,  // data = ramp length N in samples
    CFG_O_BEG     = 3'd5,  // data = samples skipped at ramp start
    CFG_O_END     = 3'd6   // data = samples skipped at ramp end
  } cfg_sel_e;

  // ---- event descriptor -----------------------------------------------------
  // Memory address (slot), memory length, channel and the event metadata:
  // timestamp, trigger value and pile-up mark.
  // The slot number is the least significant field, so that descriptor i
  // of the free list is simply the value i.
  typedef struct packed {
    logic                     pileup;
    logic signed [TRIG_W-1:0] trig_value;
    logic [TS_W-1:0]          timestamp;
    logic [CH_W-1:0]          channel;
    logic [LEN_W-1:0]         length;
    logic [SLOT_W-1:0]        slot;
  } desc_t;

  localparam int unsigned DESC_W = $bits(desc_t);

endpackage
