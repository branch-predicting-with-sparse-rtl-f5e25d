// hv_comparator -- similarity test between a query hypervector and the sign
// bits of a stored Taken or Not-Taken vector.
//
// The stored vector's sign bits are XNORed with the query and the agreeing
// elements are counted (the Hamming similarity). The count is compared with
// two thresholds: `match` when at least THR elements agree (the query is
// correlated with what the vector holds) and `confident` when at least HIGH
// agree. Between the two the match is marginal, which the training logic uses.
//
// The predictor this implements senses the count as a summed current on an
// analog match line; here the same function is computed digitally, in one
// combinational step, by summing 64-bit pop counts. Threshold values are this
// design's choice (see hypre_pkg).
module hv_comparator
  import hypre_pkg::*;
#(
  parameter int unsigned HV_W  = 4096,
  parameter int unsigned THR   = match_thr(HV_W),
  parameter int unsigned HIGH  = conf_thr(HV_W),
  localparam int unsigned SIM_W = $clog2(HV_W + 1)
) (
  input  logic [HV_W-1:0]  query,
  input  logic [HV_W-1:0]  stored,
  output logic [SIM_W-1:0] sim,
  output logic             match,
  output logic             confident
);

  localparam int unsigned CHUNKS = HV_W / 64;

  logic [HV_W-1:0] agree;
  assign agree = ~(query ^ stored);

  always_comb begin
    sim = '0;
    for (int c = 0; c < CHUNKS; c++) begin
      sim = sim + SIM_W'($countones(agree[c*64 +: 64]));
    end
  end

  assign match     = 32'(sim) >= THR;
  assign confident = 32'(sim) >= HIGH;

endmodule
