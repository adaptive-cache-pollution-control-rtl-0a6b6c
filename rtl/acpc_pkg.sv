// acpc_pkg: shared types, fixed-point formats and the configuration address map of the
// adaptive cache pollution control (ACPC) design.
//
// Number formats (all chosen for this implementation; the source describes the network only
// in floating point):
//   activation   signed 16 bit, 8 fraction bits (Q7.8)
//   weight       signed  8 bit, 6 fraction bits (Q1.6)
//   bias         signed 16 bit, activation format
//   y_hat        unsigned 8 bit reuse probability, value/256 (255 stands for 1.0)
//   U, f, P      unsigned 17 bit, 16 fraction bits (Q1.16)
//   alpha        unsigned 16 bit, alpha = value/65536
//
// Network shape: three dilated causal convolution layers (kernel 3, dilation 1, 2, 4) and two
// fully connected layers follow the source; the channel counts (4 input features, 8 channels,
// 8 hidden units) are this design's choice.
package acpc_pkg;

  localparam int ACT_W    = 16;
  localparam int ACT_FRAC = 8;
  localparam int WGT_W    = 8;
  localparam int WGT_FRAC = 6;
  localparam int ACC_W    = 32;
  localparam int PROB_W   = 8;
  localparam int QF       = 16;   // fraction bits of U, f, P
  localparam int Q_W      = 17;   // width of U, f, P

  localparam int C_IN   = 4;      // features per access
  localparam int C_HID  = 8;      // channels of every convolution layer
  localparam int FC_HID = 8;      // units of the first fully connected layer
  localparam int KSIZE  = 3;      // convolution kernel size

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic [PROB_W-1:0]       prob_t;

  // Kind of access, the "instruction type" feature of the predictor.
  typedef enum logic [1:0] {
    ITYPE_WEIGHT = 2'd0,   // model weight read
    ITYPE_EMBED  = 2'd1,   // token embedding lookup
    ITYPE_KV     = 2'd2,   // attention key/value cache read
    ITYPE_OTHER  = 2'd3
  } itype_e;

  // Configuration address map (cfg_addr), one word per weight, bias or control value.
  // Convolution weight index inside a layer: (o*CI + i)*KSIZE + k, k = 0 is the newest tap.
  // Fully connected weight index: o*NI + i.
  localparam int CFG_AW       = 10;
  localparam int CONV1_W_BASE = 0;
  localparam int CONV1_W_N    = C_HID * C_IN * KSIZE;            // 96
  localparam int CONV1_B_BASE = CONV1_W_BASE + CONV1_W_N;        // 96
  localparam int CONV2_W_BASE = CONV1_B_BASE + C_HID;            // 104
  localparam int CONV2_W_N    = C_HID * C_HID * KSIZE;           // 192
  localparam int CONV2_B_BASE = CONV2_W_BASE + CONV2_W_N;        // 296
  localparam int CONV3_W_BASE = CONV2_B_BASE + C_HID;            // 304
  localparam int CONV3_B_BASE = CONV3_W_BASE + CONV2_W_N;        // 496
  localparam int FC1_W_BASE   = CONV3_B_BASE + C_HID;            // 504
  localparam int FC1_W_N      = FC_HID * C_HID;                  // 64
  localparam int FC1_B_BASE   = FC1_W_BASE + FC1_W_N;            // 568
  localparam int FC2_W_BASE   = FC1_B_BASE + FC_HID;             // 576
  localparam int FC2_B_BASE   = FC2_W_BASE + FC_HID;             // 584
  localparam int CFG_ALPHA    = 1020;  // alpha of Eq. 3
  localparam int CFG_TRAIN    = 1021;  // online learning: [0] enable, [7:4] learning-rate shift

  // Event counters of the cache (basis of hit rate and prefetch pollution ratio).
  typedef struct packed {
    logic [31:0] accesses;        // requests accepted
    logic [31:0] demand_hits;
    logic [31:0] demand_misses;
    logic [31:0] prefetch_fills;  // lines brought in by a prefetch
    logic [31:0] prefetch_used;   // prefetched lines later hit by a demand access
    logic [31:0] polluting_evicts;// prefetched lines evicted before any demand use
    logic [31:0] evictions;       // valid lines replaced
  } cache_stats_t;

  // Saturate a wide signed value to the activation range.
  function automatic act_t sat_act(input logic signed [ACC_W-1:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return v[ACT_W-1:0];
  endfunction

endpackage
