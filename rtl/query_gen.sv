// query_gen -- rolling computation of the query hypervector of one history
// window of L branches, split so that only one XOR is left for prediction time.
//
// The query of a window PC_1 ... PC_L (PC_L newest) is
//     Q = XOR_j  rot(HV(PC_j), L - j)
// with rot a circular shift towards higher element indices, so each branch's
// position is encoded in its rotation. Moving the window by one branch takes
// three steps, whatever L:
//     1. remove the oldest branch:  Q ^ rot(HV(PC_old), L-1)  (only if `drop`,
//        i.e. the window is full)
//     2. age everything by one:     P = rot(..., 1)
//     3. add the new branch:        Q' = P ^ HV(PC_new)
// This module does steps 1 and 2, which depend only on branches already seen,
// so P (`q_part`) can be prepared off the critical path once the previous
// branch is known; step 3, a single XOR, is left for the moment the new PC
// arrives (done in hd_table). HV(PC_old) is hashed here from the PC that is
// about to leave the window.
//
// Combinational. The incremental update and keeping only the last XOR on the
// prediction path follow the predictor's description; the order
// remove-then-rotate is this design's reading of it (rotating first would need
// the oldest vector rotated by L, not L-1).
module query_gen
  import hypre_pkg::*;
#(
  parameter int unsigned HV_W = 4096,
  parameter int unsigned PC_W = 40,
  parameter int unsigned L    = 8
) (
  input  logic [HV_W-1:0] q_prev,
  input  logic [PC_W-1:0] old_pc,
  input  logic            drop,
  output logic [HV_W-1:0] q_part
);

  localparam int unsigned ROT = (L - 1) % HV_W;

  logic [HV_W-1:0] hv_old, hv_old_rot, removed;

  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_enc_old (
    .key (old_pc),
    .hv  (hv_old)
  );

  if (ROT == 0) begin : g_norot
    assign hv_old_rot = hv_old;
  end else begin : g_rot
    assign hv_old_rot = {hv_old[HV_W-1-ROT:0], hv_old[HV_W-1:HV_W-ROT]};
  end

  assign removed = drop ? (q_prev ^ hv_old_rot) : q_prev;
  assign q_part  = {removed[HV_W-2:0], removed[HV_W-1]};

endmodule
