// sdm_vector -- one stored outcome vector (Taken or Not-Taken) of the sparse
// distributed memory.
//
// The vector is HV_W signed saturating counters of CNT_W bits. Its binary
// value, as seen by the comparators, is the sign of each counter: element i
// reads as 1 while counter i is non-negative. Because the counters sum many
// stored patterns, the binary value is an element-wise majority vote of them.
//
// Training, one step per clock:
//  * add_en  -- store a query: counter i moves one step towards query bit i
//               (+1 for a 1, -1 for a 0). Elements flagged in rand_mask move
//               towards rand_val instead, so that a single insertion never
//               reaches full certainty.
//  * sub_en  -- partially remove a query after a misprediction: counter i
//               moves one step away from query bit i, but only where
//               erase_mask is set, so a frequent pattern is weakened rather
//               than wiped out.
// add_en wins if both are set. Counters saturate and reset to zero.
//
// Storing by addition, reading by sign and the two randomisation ideas follow
// the predictor's description; the mask fractions come from hv_random and the
// sign encoding (non-negative = 1) is this design's choice.
module sdm_vector #(
  parameter int unsigned HV_W  = 4096,
  parameter int unsigned CNT_W = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            add_en,
  input  logic            sub_en,
  input  logic [HV_W-1:0] query,
  input  logic [HV_W-1:0] rand_mask,
  input  logic [HV_W-1:0] rand_val,
  input  logic [HV_W-1:0] erase_mask,
  output logic [HV_W-1:0] bits
);

  localparam logic signed [CNT_W-1:0] CMAX = {1'b0, {(CNT_W-1){1'b1}}};
  localparam logic signed [CNT_W-1:0] CMIN = {1'b1, {(CNT_W-1){1'b0}}};

  logic signed [CNT_W-1:0] cnt [HV_W];

  // One saturating step up (dir = 1) or down (dir = 0).
  function automatic logic signed [CNT_W-1:0] step(logic signed [CNT_W-1:0] c, logic up);
    if (up) return (c == CMAX) ? c : c + 1'b1;
    else     return (c == CMIN) ? c : c - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < HV_W; i++) cnt[i] <= '0;
    end else if (add_en) begin
      for (int i = 0; i < HV_W; i++)
        cnt[i] <= step(cnt[i], rand_mask[i] ? rand_val[i] : query[i]);
    end else if (sub_en) begin
      for (int i = 0; i < HV_W; i++)
        if (erase_mask[i]) cnt[i] <= step(cnt[i], ~query[i]);
    end
  end

  always_comb begin
    for (int i = 0; i < HV_W; i++) bits[i] = ~cnt[i][CNT_W-1];
  end

endmodule
