// longest_match_select -- final choice of the prediction among the history
// tables and the base predictor.
//
// Table i has a longer history than table i-1. The direction of the matching
// table with the highest index (longest history) wins; if no table matched,
// the base predictor's direction is used. `provider` reports the source:
// 0 for the base predictor, i+1 for table i. Combinational; follows the
// predictor's description directly.
module longest_match_select #(
  parameter int unsigned N_TABLES = 8,
  localparam int unsigned PROV_W  = $clog2(N_TABLES + 1)
) (
  input  logic [N_TABLES-1:0] hit,
  input  logic [N_TABLES-1:0] dir,
  input  logic                base_dir,
  output logic                pred,
  output logic [PROV_W-1:0]   provider
);

  always_comb begin
    pred     = base_dir;
    provider = '0;
    for (int i = 0; i < N_TABLES; i++) begin
      if (hit[i]) begin
        pred     = dir[i];
        provider = PROV_W'(i + 1);
      end
    end
  end

endmodule
