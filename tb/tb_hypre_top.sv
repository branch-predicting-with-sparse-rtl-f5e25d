// tb_hypre_top -- end-to-end test of the whole predictor at reduced size
// (1024-element vectors, history lengths 2 ... 256, 256-entry path history):
// a synthetic program with local, path-correlated, loop and random branches.
// See tb_hypre_body.svh for the program and the checks.
module tb_hypre_top;
  localparam int N_BRANCH = 3000;
  localparam int WARM = 1500;
  localparam int MIN_ACC = 90;
  localparam int N_TAB_OBS = 2;

  hypre_top #(
    .HV_W (1024),
    .HIST_LEN ('{2, 4, 8, 16, 32, 64, 128, 256}),
    .PH_DEPTH (256)
  ) dut (.*);

`include "tb_hypre_body.svh"
endmodule
