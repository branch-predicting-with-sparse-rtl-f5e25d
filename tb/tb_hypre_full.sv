// tb_hypre_full -- the whole predictor at its full configuration (4096-element
// vectors, history lengths 8 ... 4094, 4094-entry path history) on the same
// synthetic program as tb_hypre_top, long enough for the first tables to
// learn. See tb_hypre_body.svh for the program and the checks.
module tb_hypre_full;
  localparam int N_BRANCH = 6000;
  localparam int WARM = 4500;
  localparam int MIN_ACC = 90;
  localparam int N_TAB_OBS = 1;

  hypre_top dut (.*);

`include "tb_hypre_body.svh"
endmodule
