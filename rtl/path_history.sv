// path_history -- the PCs of the most recent DEPTH branches, oldest dropped
// first, with one read tap per history table.
//
// A circular buffer written at a pointer on every push. Tap i returns the PC
// of age HIST_LEN[i]-1 (age 0 is the newest entry): the branch that leaves the
// window of table i when the next branch enters it. `count` is the number of
// valid entries, saturating at DEPTH; entries beyond it are stale and must not
// be used, which is why the buffer itself needs no reset.
//
// Timing: push at a rising edge; taps and count show the new state after it.
// Keeping branch PCs (a path history) rather than outcome bits, 40 bits by
// 4094 entries, follows the predictor's configuration; the circular-buffer
// organisation is this design's choice.
module path_history
  import hypre_pkg::*;
#(
  parameter int unsigned PC_W     = 40,
  parameter int unsigned DEPTH    = 4094,
  parameter hist_len_t   HIST_LEN = hypre_pkg::CFG_HIST_LEN,
  localparam int unsigned CNT_W   = $clog2(DEPTH + 1),
  localparam int unsigned PTR_W   = $clog2(DEPTH)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             push,
  input  logic [PC_W-1:0]                  pc_in,
  output logic [N_TABLES-1:0][PC_W-1:0]    tap_pc,
  output logic [CNT_W-1:0]                 count
);

  logic [PC_W-1:0]  mem [DEPTH];
  logic [PTR_W-1:0] wptr;   // next entry to write; wptr-1 is the newest

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= pc_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      count <= '0;
    end else if (push) begin
      wptr  <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (32'(count) != DEPTH) count <= count + 1'b1;
    end
  end

  for (genvar t = 0; t < N_TABLES; t++) begin : g_tap
    localparam int unsigned AGE = HIST_LEN[t] - 1;
    if (AGE >= DEPTH) begin : g_bad_depth
      $error("path_history: DEPTH too small for HIST_LEN");
    end
    // index of age AGE = (wptr - 1 - AGE) mod DEPTH
    logic [PTR_W:0] idx;  // one spare bit for the wrap-around sum
    always_comb begin
      if (32'(wptr) >= AGE + 1) idx = (PTR_W+1)'(32'(wptr) - AGE - 1);
      else                      idx = (PTR_W+1)'(32'(wptr) + DEPTH - AGE - 1);
    end
    assign tap_pc[t] = mem[idx[PTR_W-1:0]];
  end

endmodule
