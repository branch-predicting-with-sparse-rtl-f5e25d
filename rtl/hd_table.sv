// hd_table -- one history length of the predictor: query generator, Taken and
// Not-Taken outcome vectors, their two comparators and the training rule.
//
// Between branches q_reg holds the partial query P of the next branch (the
// window already aged by one, see query_gen). Prediction (req = 1): the query
// is P ^ hv_new, a single XOR, and is compared with the sign bits of both
// vectors. `hit` says that at least one vector matched; `dir` is the
// outcome of the matching vector, or of the more similar one if both matched
// (a tie goes to Taken). hit/dir are combinational in the request cycle. At the
// clock edge the query is stored in q_reg and the comparator flags are
// registered for training. At the update edge, q_reg is replaced by the
// partial query of the following branch, formed from the query, old_pc (the
// path-history entry that leaves the window next) and drop.
//
// Resolution (upd = 1, outcome `taken`), using the stored query and flags:
//  * the vector of the actual outcome gets the query added unless it already
//    matched it confidently (correct and sure patterns are not reinforced);
//  * the vector of the opposite outcome gets the query partially subtracted
//    if it matched it (it would have, or did, cause a misprediction).
//
// One branch is in flight: q_reg must not be overwritten by a new request
// before the update of the previous one. Comparing with both a Taken and a
// Not-Taken vector, training only marginal or wrong patterns and partial
// removal follow the predictor's description; the exact rule above is this
// design's reading of it.
module hd_table
  import hypre_pkg::*;
#(
  parameter int unsigned HV_W  = 4096,
  parameter int unsigned CNT_W = 4,
  parameter int unsigned PC_W  = 40,
  parameter int unsigned L     = 8,
  localparam int unsigned SIM_W = $clog2(HV_W + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // prediction
  input  logic            req,
  input  logic [HV_W-1:0] hv_new,
  input  logic [PC_W-1:0] old_pc,
  input  logic            drop,
  output logic            hit,
  output logic            dir,
  // training
  input  logic            upd,
  input  logic            taken,
  input  logic [HV_W-1:0] rand_mask,
  input  logic [HV_W-1:0] rand_val,
  input  logic [HV_W-1:0] erase_mask,
  // training actions of this update (for observation)
  output train_op_e       op_t,
  output train_op_e       op_nt
);

  logic [HV_W-1:0]  q_reg, q_next, q_part;
  logic [HV_W-1:0]  t_bits, nt_bits;
  logic [SIM_W-1:0] t_sim, nt_sim;
  logic             t_match, nt_match, t_conf, nt_conf;
  logic             t_match_r, nt_match_r, t_conf_r, nt_conf_r;

  query_gen #(.HV_W(HV_W), .PC_W(PC_W), .L(L)) u_qgen (
    .q_prev (q_reg),
    .old_pc (old_pc),
    .drop   (drop),
    .q_part (q_part)
  );

  assign q_next = q_reg ^ hv_new;

  hv_comparator #(.HV_W(HV_W)) u_cmp_t (
    .query (q_next), .stored (t_bits), .sim (t_sim), .match (t_match), .confident (t_conf)
  );
  hv_comparator #(.HV_W(HV_W)) u_cmp_nt (
    .query (q_next), .stored (nt_bits), .sim (nt_sim), .match (nt_match), .confident (nt_conf)
  );

  assign hit = t_match | nt_match;
  assign dir = t_match & (~nt_match | (t_sim >= nt_sim));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_reg      <= '0;
      t_match_r  <= 1'b0;
      nt_match_r <= 1'b0;
      t_conf_r   <= 1'b0;
      nt_conf_r  <= 1'b0;
    end else if (upd) begin
      q_reg      <= q_part;
    end else if (req) begin
      q_reg      <= q_next;
      t_match_r  <= t_match;
      nt_match_r <= nt_match;
      t_conf_r   <= t_conf;
      nt_conf_r  <= nt_conf;
    end
  end

  always_comb begin
    op_t  = TRAIN_NONE;
    op_nt = TRAIN_NONE;
    if (upd) begin
      if (taken) begin
        if (!t_conf_r)  op_t  = TRAIN_ADD;
        if (nt_match_r) op_nt = TRAIN_SUB;
      end else begin
        if (!nt_conf_r) op_nt = TRAIN_ADD;
        if (t_match_r)  op_t  = TRAIN_SUB;
      end
    end
  end

  sdm_vector #(.HV_W(HV_W), .CNT_W(CNT_W)) u_vec_t (
    .clk, .rst_n,
    .add_en (op_t == TRAIN_ADD), .sub_en (op_t == TRAIN_SUB),
    .query (q_reg), .rand_mask, .rand_val, .erase_mask,
    .bits (t_bits)
  );
  sdm_vector #(.HV_W(HV_W), .CNT_W(CNT_W)) u_vec_nt (
    .clk, .rst_n,
    .add_en (op_nt == TRAIN_ADD), .sub_en (op_nt == TRAIN_SUB),
    .query (q_reg), .rand_mask, .rand_val, .erase_mask,
    .bits (nt_bits)
  );

endmodule
