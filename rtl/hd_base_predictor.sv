// hd_base_predictor -- the hyperdimensional fallback ("HD bimodal") predictor.
//
// A PC-indexed local history table supplies the last LHIST_W outcomes of the
// branch. They are concatenated with the PC and hashed into a BASE_HV_W-bit
// query, which is compared with a single stored Taken vector: the prediction
// is Taken when the query matches it (similarity >= THR), Not Taken otherwise.
// Because every (history, PC) pair gets its own random query, the vector can
// learn a different answer for each local pattern of each branch, e.g. a
// branch that alternates.
//
// Prediction: `pred` is combinational in the request cycle. At the clock edge
// of a request the query, the table index and the comparison result are
// registered. Resolution (upd): the outcome is shifted into the local history
// entry, and if the prediction was wrong or marginal (similarity within
// HIGH-THR of THR) the query is added to the vector for a taken outcome or
// subtracted from it for a not-taken one.
//
// Structure and sizes (1024-element vector, 4-bit history, 2048 entries)
// follow the predictor's description. The 2-bit counters, the index bits
// pc[2 +: IDX_W], the training rule and the absence of randomisation here are
// this design's choices.
module hd_base_predictor
  import hypre_pkg::*;
#(
  parameter int unsigned PC_W    = 40,
  parameter int unsigned HV_W    = 1024,
  parameter int unsigned CNT_W   = 2,
  parameter int unsigned LHIST_W = 4,
  parameter int unsigned ENTRIES = 2048,
  localparam int unsigned IDX_W  = $clog2(ENTRIES),
  localparam int unsigned SIM_W  = $clog2(HV_W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req,
  input  logic [PC_W-1:0] pc,
  output logic            pred,
  input  logic            upd,
  input  logic            taken,
  output train_op_e       op
);

  localparam int unsigned THR  = match_thr(HV_W);
  localparam int unsigned HIGH = conf_thr(HV_W);
  localparam int unsigned LOW  = THR - (HIGH - THR);

  logic [IDX_W-1:0]   idx, idx_r;
  logic [LHIST_W-1:0] lhist;
  logic [HV_W-1:0]    q, q_r, t_bits;
  logic [SIM_W-1:0]   sim;
  logic               match, conf, marginal;
  logic               pred_r, marginal_r, train;

  assign idx = pc[2 +: IDX_W];

  local_history_table #(.ENTRIES(ENTRIES), .LHIST_W(LHIST_W)) u_lht (
    .clk, .rst_n,
    .rd_idx   (idx),
    .rd_hist  (lhist),
    .wr_en    (upd),
    .wr_idx   (idx_r),
    .wr_taken (taken)
  );

  hv_encoder #(.KEY_W(LHIST_W + PC_W), .HV_W(HV_W)) u_enc (
    .key ({lhist, pc}),
    .hv  (q)
  );

  hv_comparator #(.HV_W(HV_W)) u_cmp (
    .query (q), .stored (t_bits), .sim (sim), .match (match), .confident (conf)
  );

  assign pred     = match;
  assign marginal = (32'(sim) >= LOW) && !conf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r        <= '0;
      idx_r      <= '0;
      pred_r     <= 1'b0;
      marginal_r <= 1'b0;
    end else if (req) begin
      q_r        <= q;
      idx_r      <= idx;
      pred_r     <= match;
      marginal_r <= marginal;
    end
  end

  assign train = upd && ((pred_r != taken) || marginal_r);
  assign op    = !train ? TRAIN_NONE : (taken ? TRAIN_ADD : TRAIN_SUB);

  sdm_vector #(.HV_W(HV_W), .CNT_W(CNT_W)) u_vec_t (
    .clk, .rst_n,
    .add_en     (op == TRAIN_ADD),
    .sub_en     (op == TRAIN_SUB),
    .query      (q_r),
    .rand_mask  ('0),
    .rand_val   ('0),
    .erase_mask ('1),
    .bits       (t_bits)
  );

endmodule
