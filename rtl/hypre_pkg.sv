// hypre_pkg -- constants, types and helper functions shared by the HYPRE
// hyperdimensional branch predictor.
//
// The sizes are those of the over-provisioned ("ideal") configuration of the
// predictor: eight history tables with path histories of 8 ... 4094 branches,
// 4096-element Taken and Not-Taken vectors holding 4-bit saturating counters,
// 40-bit path-history entries, and an HD base predictor with a 1024-element
// vector and a 2048 x 4-bit local history table. The 2-bit saturation of the
// base vector is this design's reading of the 10 240-bit base budget
// (2048 x 4 history bits + 1024 x 2 vector bits).
//
// Match and confidence thresholds are this design's choice: a query matches a
// stored vector when at least N/2 + 2*sqrt(N) of its N elements agree (four
// standard deviations above the mean of two random vectors) and is confidently
// matched above N/2 + 4*sqrt(N). Below the confidence bound a pattern counts
// as marginal and is trained.
//
// mix64 is the add-rotate-xor mixer behind every PC-to-hypervector hash. It is
// a pure function with no state, so a hypervector is recomputed on demand
// instead of being kept in a dictionary.
package hypre_pkg;

  localparam int unsigned CFG_HV_W        = 4096;  // hypervector length of the history tables
  localparam int unsigned CFG_CNT_W       = 4;     // saturation: counter bits per vector element
  localparam int unsigned N_TABLES    = 8;     // number of history lengths
  localparam int unsigned CFG_PC_W        = 40;    // path history entry width
  localparam int unsigned CFG_PH_DEPTH    = 4094;  // path history entries
  localparam int unsigned CFG_BASE_HV_W   = 1024;  // base predictor hypervector length
  localparam int unsigned CFG_BASE_CNT_W  = 2;     // base vector counter bits
  localparam int unsigned CFG_LHIST_W     = 4;     // local history bits per entry
  localparam int unsigned CFG_LHT_ENTRIES = 2048;  // local history table entries

  typedef int unsigned hist_len_t [N_TABLES];
  localparam hist_len_t CFG_HIST_LEN = '{8, 32, 128, 256, 512, 1024, 2048, 4094};

  localparam logic [63:0] GOLDEN = 64'h9E37_79B9_7F4A_7C15;

  // Which vector a training step acts on, and how.
  typedef enum logic [1:0] {
    TRAIN_NONE = 2'd0,
    TRAIN_ADD  = 2'd1,
    TRAIN_SUB  = 2'd2
  } train_op_e;

  function automatic int unsigned isqrt(int unsigned n);
    int unsigned r;
    r = 0;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  // Elements that must agree for a match.
  function automatic int unsigned match_thr(int unsigned n);
    return n / 2 + 2 * isqrt(n);
  endfunction

  // Elements that must agree for a confident (non-marginal) match.
  function automatic int unsigned conf_thr(int unsigned n);
    return n / 2 + 4 * isqrt(n);
  endfunction

  // 64-bit add-rotate-xor mixer.
  function automatic logic [63:0] mix64(logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x >> 31);
    y = y + ((y << 9) ^ 64'hD6E8_FEB8_6659_FD93);
    y = y ^ (y >> 27) ^ {y[12:0], y[63:13]};
    y = y + ((y << 17) ^ 64'hA076_1D64_78BD_642F);
    y = y ^ (y >> 33);
    y = y + (y << 5);
    y = y ^ (y >> 29);
    return y;
  endfunction

endpackage
