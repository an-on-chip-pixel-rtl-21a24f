// lidar_pkg: sizes, types and the PE schedule command shared by the asynchronous
// SPAD dToF pixel-processing design.
//
// The histogram geometry (128 bins of 10 bits), the 16-phase x 8-stage TDC, the
// four pixels per processing element, the 20-bit event pack, the 6-bit peak id
// and the 6-bit square root follow the published architecture. The layout of the
// event pack (13-bit laser-cycle count N and 7-bit peak bin), the 4-bit alpha and
// the 13-bit cycle counters are choices of this design.
package lidar_pkg;

  localparam int N_BINS     = 128;          // histogram bins per pixel
  localparam int BIN_W      = 7;            // clog2(N_BINS)
  localparam int HIST_W     = 10;           // bits per histogram bin
  localparam int N_PHASES   = 16;           // TDC clock phases (250 ps each)
  localparam int N_STAGES   = 8;            // TDC coarse stages (4 ns each)
  localparam int N_PIX      = 4;            // pixels multiplexed into one PE
  localparam int N_GROUPS   = 8;            // stage-1 bin groups
  localparam int GROUP_BINS = N_BINS / N_GROUPS;
  localparam int SQRT_W     = 6;            // square-root result bits (b = 32 .. 1)
  localparam int ALPHA_W    = 4;            // threshold multiplier alpha
  localparam int THR_W      = HIST_W + 2;   // BG + alpha*sqrt(BG) <= 1023 + 15*31
  localparam int NCYC_W     = 13;           // laser cycles since histogram reset
  localparam int EVT_W      = 20;           // event pack width
  localparam int ID_W       = 6;            // peak id width
  localparam int OUT_W      = EVT_W + ID_W; // word written to the FIFO (26)

  typedef logic [HIST_W-1:0] bin_t;

  // 20-bit event pack: laser cycles accumulated by the histogram and peak bin.
  typedef struct packed {
    logic [NCYC_W-1:0] n_cycles;
    logic [BIN_W-1:0]  peak_bin;
  } event_pack_t;

  // 26-bit word sent to the host.
  typedef struct packed {
    logic [ID_W-1:0] peak_id;
    event_pack_t     pack;
  } event_word_t;

  // One-clock commands from the PE controller to the PE core ("State" bus).
  typedef struct packed {
    logic       s1_cmp;     // compare 8 bins of group s1_grp, half s1_half
    logic [2:0] s1_grp;
    logic       s1_half;
    logic       s1_all;     // compare the 8 group maxima ("Max All")
    logic       s2_sample;  // stage 2 samples the stage-1 result
    logic       s2_sqrt;    // one square-root iteration
    logic       s2_thr;     // threshold calculation
    logic       s2_gen;     // peak decision
  } pe_cmd_t;

endpackage
