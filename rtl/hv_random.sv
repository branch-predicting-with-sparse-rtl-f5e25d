// hv_random -- pseudo-random hypervector-wide masks for training.
//
// A 64-bit xorshift generator advances on every `step`. Its state is expanded
// to HV_W-bit words by the hypervector hash (hv_encoder), once per output with
// a different salt:
//   rand_mask  -- AND of STORE_RAND_LOG2 independent words: each element set
//                 with probability 2^-STORE_RAND_LOG2 (1/16 by default); marks
//                 the elements of a stored query that are randomised;
//   rand_val   -- one word: the random values those elements take;
//   erase_mask -- one word: each element set with probability 1/2; marks the
//                 elements touched by a partial removal.
// Outputs are a function of the current state (stable between steps). The
// generator, the fractions and sharing one source among all tables are this
// design's choices; the predictor only asks for some randomisation.
module hv_random #(
  parameter int unsigned HV_W            = 4096,
  parameter int unsigned STORE_RAND_LOG2 = 4,
  parameter logic [63:0] SEED            = 64'h0123_4567_89AB_CDEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            step,
  output logic [HV_W-1:0] rand_mask,
  output logic [HV_W-1:0] rand_val,
  output logic [HV_W-1:0] erase_mask
);

  localparam int unsigned NW = STORE_RAND_LOG2 + 2;

  logic [63:0] state, nxt;

  always_comb begin
    nxt = state ^ (state << 13);
    nxt = nxt ^ (nxt >> 7);
    nxt = nxt ^ (nxt << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= nxt;
  end

  logic [HV_W-1:0] word [NW];

  for (genvar w = 0; w < NW; w++) begin : g_word
    hv_encoder #(.KEY_W(64), .HV_W(HV_W)) u_enc (
      .key (state ^ (64'h5851_F42D_4C95_7F2D * 64'(w + 1))),
      .hv  (word[w])
    );
  end

  always_comb begin
    rand_mask = '1;
    for (int w = 0; w < int'(STORE_RAND_LOG2); w++) rand_mask &= word[w];
  end
  assign rand_val   = word[NW-2];
  assign erase_mask = word[NW-1];

endmodule
