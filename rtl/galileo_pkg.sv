// galileo_pkg: types and constants shared by the preprocessing-FPGA RTL.
//
// The preprocessing board receives 36 channels of 14-bit samples at 100 Msps
// (three 12-channel digitizer boards), computes energies and short traces,
// validates events with the global trigger and synchronization (GTS) tree
// and ships them to the host at up to 400 MB/s (32 bits per 100 MHz cycle).
// Sample width, channel count, sampling rate and the 20 us validation window
// are taken from the paper; every other width here is this design's choice.
package galileo_pkg;

  localparam int SAMPLE_W    = 14;   // ADC resolution
  localparam int NUM_CH      = 36;   // links per preprocessing board
  localparam int DATA_W      = 16;   // signed sample width inside a channel
  localparam int ENERGY_W    = 16;
  localparam int TS_W        = 48;   // GTS timestamp width (design choice)
  localparam int CLK_MHZ     = 100;
  localparam int TIMEOUT_CYC = 20 * CLK_MHZ;  // 20 us GTS reply window

  // Per-channel programmable parameters, written by the host.
  typedef struct packed {
    logic [15:0] trig_thr;      // first-level trigger threshold (ADC units)
    logic [3:0]  trig_diff;     // trigger differentiator length D (1..15)
    logic [15:0] trig_holdoff;  // cycles during which no new trigger is issued
    logic [31:0] idle_period;   // cycles without trigger before a fake one (0 = off)
    logic [9:0]  rise_k;        // trapezoid rise time k (samples)
    logic [9:0]  flat_m;        // trapezoid flat top m (samples)
    logic [15:0] pz_m;          // pole-zero constant M (decay time in samples)
    logic [5:0]  e_shift;       // energy = s >> e_shift
    logic [3:0]  blr_shift;     // baseline average weight 2^-blr_shift
    logic [15:0] blr_window;    // samples after a trigger kept out of the baseline
    logic        blr_en;
    logic        enable;        // channel enable
  } ch_cfg_t;

  // Long-trace / spectrum RAM modes.
  typedef enum logic [1:0] {
    LT_OFF       = 2'd0,
    LT_FREE      = 2'd1,   // long trace, non-triggered: starts on arm
    LT_TRIGGERED = 2'd2,   // long trace, starts at next trigger of the channel
    LT_HISTO     = 2'd3    // energy histogram
  } lt_mode_e;

  // Trigger request to the GTS tree and its reply.
  typedef struct packed {
    logic [5:0] ch;
    logic [1:0] slot;
  } gts_tag_t;

  typedef struct packed {
    gts_tag_t tag;
    logic     accept;
  } gts_reply_t;

  // First word of a packaged event.
  localparam logic [3:0] EVT_MAGIC = 4'hE;
  localparam int         HDR_WORDS = 3;

endpackage
