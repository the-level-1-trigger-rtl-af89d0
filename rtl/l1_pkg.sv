// l1_pkg: widths, record types and constants shared by the level-1 trigger.
//
// The data widths follow the arithmetic of the pipeline. A 16-bit unsigned ADC
// sample grows to 34 bits in the third-order CIC decimator (16 + 3*log2(64) for
// a charge channel), to 46 bits in the 16-channel linear combination (x 8-bit
// coefficient, + 4 bits for the sum of 16) and to 72 bits in the 1024-tap FIR
// (x 16-bit coefficient, + 10 bits for the sum). The 72-bit figure, the 32-bit
// FIR output and the 32/32/8/8-bit trigger primitive are the published numbers;
// the 34 and 46-bit intermediate widths are derived from them. The veto-FIFO
// depth, the order of the 16 threshold bits and the encodings of the veto
// records are this design's own choices.
package l1_pkg;

  // ---- input ---------------------------------------------------------------
  localparam int ADC_W       = 16;
  localparam int NUM_PHONON  = 12;
  localparam int NUM_CHARGE  = 4;
  localparam int NUM_CH      = NUM_PHONON + NUM_CHARGE;
  localparam int PHONON_R    = 16;   // phonon decimation factor
  localparam int CHARGE_R    = 64;   // charge decimation factor
  localparam int CIC_ORDER   = 3;    // N
  localparam int PHONON_GROUP = 4;   // channels per phonon downsample filter
  localparam int CHARGE_GROUP = 2;   // channels per charge downsample filter

  // ---- datapath widths -----------------------------------------------------
  localparam int DS_W        = 34;   // downsampled channel sample (unsigned)
  localparam int LC_COEF_W   = 8;
  localparam int LC_W        = DS_W + LC_COEF_W + $clog2(NUM_CH);   // 46
  localparam int FIR_TAPS    = 1024;
  localparam int FIR_COEF_W  = 16;
  localparam int FIR_ACC_W   = LC_W + FIR_COEF_W + $clog2(FIR_TAPS); // 72
  localparam int FIR_OUT_W   = 32;
  localparam int FIR_DROP    = 40;   // LSBs dropped after the shift
  localparam int FIR_SHIFT_W = 6;

  // ---- trigger structure ---------------------------------------------------
  localparam int NUM_PATHS   = 4;
  localparam int NUM_THL     = 8;
  localparam int NUM_TRL     = 8;
  localparam int TS_W        = 32;
  localparam int TRIG_DEPTH  = 256;
  localparam int VETO_DEPTH  = 64;
  localparam int TIME_W      = 48;   // live-time / veto-time counters

  typedef logic signed [FIR_OUT_W-1:0] fir_out_t;

  // Trigger primitive produced by a peak search at the end of its window.
  typedef struct packed {
    logic [1:0]            path;        // which trigger path produced it
    logic [FIR_OUT_W-1:0]  amplitude;   // maximum FIR value (signed)
    logic [TS_W-1:0]       timestamp;   // time of the maximum
    logic [NUM_THL-1:0]    peak_thr;    // threshold bits at the peak
    logic [NUM_THL-1:0]    window_thr;  // thresholds active anywhere in the window
  } primitive_t;

  // Entry of the trigger FIFO: primitive plus one decision bit per trigger logic.
  typedef struct packed {
    primitive_t            prim;
    logic [NUM_TRL-1:0]    decision;
  } trig_entry_t;

  typedef enum logic [1:0] {
    VETO_FULL_BEGIN = 2'd0,
    VETO_FULL_END   = 2'd1,
    VETO_EXT_BEGIN  = 2'd2,
    VETO_EXT_END    = 2'd3
  } veto_kind_e;

  typedef struct packed {
    veto_kind_e            kind;
    logic [TS_W-1:0]       timestamp;
  } veto_entry_t;

  // ---- run-time configuration ---------------------------------------------
  typedef struct packed {
    logic [1:0]            sel;     // FIR output this threshold watches
    logic [FIR_OUT_W-1:0]  act;     // activation threshold (signed)
    logic [FIR_OUT_W-1:0]  deact;   // deactivation threshold (signed)
  } thl_cfg_t;

  typedef struct packed {
    logic [31:0]           sat_len;     // window length (samples) of the saturated rule
    logic [TS_W-1:0]       sat_offset;  // timestamp offset from window start
  } ps_cfg_t;

  // The 16 examined bits are {window_thr, peak_thr}.
  typedef struct packed {
    logic [NUM_PATHS-1:0][2*NUM_THL-1:0] req_one;   // bits that must be 1
    logic [NUM_PATHS-1:0][2*NUM_THL-1:0] req_zero;  // bits that must be 0
    logic [15:0]                         reject_prob; // in units of 1/65536
  } trl_cfg_t;

endpackage
