// hypre_top -- HYPRE, a branch predictor built on hyperdimensional computing
// and sparse distributed memory.
//
// Each predicted branch PC is hashed into a 4096-bit hypervector. For each of
// eight path-history lengths (8 ... 4094 branches) a query vector encodes the
// sequence of recent branch PCs, each rotated by its age and all XORed
// together; it is updated incrementally per branch. Each history length keeps
// a Taken and a Not-Taken vector of saturating counters; a query that agrees
// with one of them in clearly more than half of its elements "matches" it.
// The matching table with the longest history provides the prediction; when
// none matches, an HD base predictor (local history + PC hashed to 1024 bits
// and compared with one Taken vector) decides.
//
// Interface and timing (one branch in flight):
//   cycle t   : req_valid && req_ready with req_pc. The prediction is computed
//               combinationally and registered; the PC enters the path history.
//   cycle t+1 : pred_valid = 1 with pred_taken and pred_provider
//               (0 = base predictor, i+1 = history table i). req_ready = 0.
//   later     : upd_valid with upd_taken resolves that branch: all vectors and
//               the local history are trained at that edge, each table
//               prepares the partial query of the next branch (so that only
//               one XOR remains at the next request), and req_ready returns
//               to 1 in the next cycle.
// The one-cycle prediction latency and the single in-flight branch are this
// design's choices; the predictor only says predictions must be timely.
//
// The configuration is the predictor's over-provisioned one (both Taken and
// Not-Taken vectors, path history). Parameters may be lowered for fast
// simulation.
module hypre_top
  import hypre_pkg::*;
#(
  parameter int unsigned PC_W        = hypre_pkg::CFG_PC_W,
  parameter int unsigned HV_W        = hypre_pkg::CFG_HV_W,
  parameter int unsigned CNT_W       = hypre_pkg::CFG_CNT_W,
  parameter hist_len_t   HIST_LEN    = hypre_pkg::CFG_HIST_LEN,
  parameter int unsigned PH_DEPTH    = hypre_pkg::CFG_PH_DEPTH,
  parameter int unsigned BASE_HV_W   = hypre_pkg::CFG_BASE_HV_W,
  parameter int unsigned BASE_CNT_W  = hypre_pkg::CFG_BASE_CNT_W,
  parameter int unsigned LHIST_W     = hypre_pkg::CFG_LHIST_W,
  parameter int unsigned LHT_ENTRIES = hypre_pkg::CFG_LHT_ENTRIES,
  localparam int unsigned PROV_W     = $clog2(N_TABLES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PC_W-1:0]   req_pc,
  output logic              pred_valid,
  output logic              pred_taken,
  output logic [PROV_W-1:0] pred_provider,
  input  logic              upd_valid,
  input  logic              upd_taken
);

  localparam int unsigned PHC_W = $clog2(PH_DEPTH + 1);

  logic                           req_fire, pending;
  logic [HV_W-1:0]                hv_new;
  logic [N_TABLES-1:0][PC_W-1:0]  tap_pc;
  logic [PHC_W-1:0]               ph_count;
  logic [N_TABLES-1:0]            hit, dir;
  logic                           base_dir, pred;
  logic [PROV_W-1:0]              provider;
  logic [HV_W-1:0]                rand_mask, rand_val, erase_mask;

  assign req_ready = !pending;
  assign req_fire  = req_valid && req_ready;

  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_enc_new (
    .key (req_pc),
    .hv  (hv_new)
  );

  path_history #(.PC_W(PC_W), .DEPTH(PH_DEPTH), .HIST_LEN(HIST_LEN)) u_path (
    .clk, .rst_n,
    .push   (req_fire),
    .pc_in  (req_pc),
    .tap_pc (tap_pc),
    .count  (ph_count)
  );

  hv_random #(.HV_W(HV_W)) u_rand (
    .clk, .rst_n,
    .step       (upd_valid),
    .rand_mask  (rand_mask),
    .rand_val   (rand_val),
    .erase_mask (erase_mask)
  );

  for (genvar t = 0; t < N_TABLES; t++) begin : g_tab
    train_op_e op_t, op_nt;   // training actions, observed by the testbenches only
    hd_table #(.HV_W(HV_W), .CNT_W(CNT_W), .PC_W(PC_W), .L(HIST_LEN[t])) u_tab (
      .clk, .rst_n,
      .req        (req_fire),
      .hv_new     (hv_new),
      .old_pc     (tap_pc[t]),
      .drop       (32'(ph_count) >= HIST_LEN[t]),
      .hit        (hit[t]),
      .dir        (dir[t]),
      .upd        (upd_valid),
      .taken      (upd_taken),
      .rand_mask  (rand_mask),
      .rand_val   (rand_val),
      .erase_mask (erase_mask),
      .op_t       (op_t),
      .op_nt      (op_nt)
    );
  end

  train_op_e base_op;         // observed by the testbenches only
  hd_base_predictor #(
    .PC_W (PC_W), .HV_W (BASE_HV_W), .CNT_W (BASE_CNT_W),
    .LHIST_W (LHIST_W), .ENTRIES (LHT_ENTRIES)
  ) u_base (
    .clk, .rst_n,
    .req   (req_fire),
    .pc    (req_pc),
    .pred  (base_dir),
    .upd   (upd_valid),
    .taken (upd_taken),
    .op    (base_op)
  );

  longest_match_select #(.N_TABLES(N_TABLES)) u_sel (
    .hit      (hit),
    .dir      (dir),
    .base_dir (base_dir),
    .pred     (pred),
    .provider (provider)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending       <= 1'b0;
      pred_valid    <= 1'b0;
      pred_taken    <= 1'b0;
      pred_provider <= '0;
    end else begin
      pred_valid <= req_fire;
      if (req_fire) begin
        pending       <= 1'b1;
        pred_taken    <= pred;
        pred_provider <= provider;
      end else if (upd_valid) begin
        pending       <= 1'b0;
      end
    end
  end

  // An update must resolve the branch in flight.
  a_upd_has_branch: assert property (@(posedge clk) disable iff (!rst_n) upd_valid |-> pending);

endmodule
