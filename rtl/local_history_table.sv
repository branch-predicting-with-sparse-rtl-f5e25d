// local_history_table -- per-branch outcome history for the HD base
// predictor: ENTRIES entries of LHIST_W bits, indexed by PC bits.
//
// Read is combinational (rd_idx -> rd_hist). A write shifts the resolved
// outcome into entry wr_idx at the clock edge, newest outcome in bit 0, the
// oldest falling out of the top. Entries reset to all zeros (not taken).
// Branches that share an index share an entry; the predictor tolerates this
// aliasing because the history is combined with the full PC afterwards.
// Size (2048 x 4 bits) follows the predictor's configuration; bit order and
// reset value are this design's choice.
module local_history_table #(
  parameter int unsigned ENTRIES = 2048,
  parameter int unsigned LHIST_W = 4,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [IDX_W-1:0]   rd_idx,
  output logic [LHIST_W-1:0] rd_hist,
  input  logic               wr_en,
  input  logic [IDX_W-1:0]   wr_idx,
  input  logic               wr_taken
);

  logic [LHIST_W-1:0] mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_idx] <= {mem[wr_idx][LHIST_W-2:0], wr_taken};
    end
  end

  assign rd_hist = mem[rd_idx];

endmodule
