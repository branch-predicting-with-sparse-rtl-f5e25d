// hv_encoder -- hashes a key (a branch PC, or local history concatenated with
// a PC) into a pseudo-random hypervector of HV_W bits.
//
// Every branch needs its own random hypervector. Rather than storing one per
// PC, the vector is regenerated from the key whenever it is needed: the key is
// mixed once, then each 64-bit chunk c of the output is a second mix of that
// value XORed with a per-chunk seed (c+1) * golden-ratio constant. Equal keys
// always give equal vectors; different keys give vectors that agree in about
// half of their elements, as two random hypervectors do.
//
// Purely combinational. HV_W must be a multiple of 64 and KEY_W at most 64.
// Hashing instead of a dictionary follows the predictor's description; the
// mixer itself is this design's choice.
module hv_encoder
  import hypre_pkg::*;
#(
  parameter int unsigned KEY_W = 40,
  parameter int unsigned HV_W  = 4096
) (
  input  logic [KEY_W-1:0] key,
  output logic [HV_W-1:0]  hv
);

  localparam int unsigned CHUNKS = HV_W / 64;

  if (HV_W % 64 != 0 || KEY_W > 64) begin : g_bad_size
    $error("hv_encoder: HV_W must be a multiple of 64 and KEY_W at most 64");
  end

  logic [63:0] k0;
  assign k0 = mix64(64'(key));

  for (genvar c = 0; c < CHUNKS; c++) begin : g_chunk
    localparam logic [63:0] SEED = GOLDEN * 64'(c + 1);
    assign hv[c*64 +: 64] = mix64(k0 ^ SEED);
  end

endmodule
