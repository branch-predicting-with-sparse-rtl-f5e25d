// Shared body of the end-to-end HYPRE testbenches (tb_hypre_top at reduced
// size, tb_hypre_full at full size). The including module declares
// N_BRANCH (branches to run) and WARM (branches before accuracy is counted)
// and instantiates hypre_top as `dut` on the signals below.
//
// Synthetic program, one loop iteration per step i:
//   0x100  A : alternates taken / not taken                 (local pattern)
//   0x140 / 0x180 : the path taken after A (always T / always NT)
//   0x1c0  C : repeats A's outcome                           (path correlation)
//   0x200  R : random (noise: mispredictions, both-vector matches)
//   0x240  L : loop branch, not taken every 10th iteration   (long pattern)
// Checks: the one-cycle prediction latency and the request/update handshake
// on every branch; accuracy on the deterministic branches after warm-up; and
// that every mechanism happened: base and table providers, additions and
// partial subtractions on Taken and Not-Taken vectors, base training,
// both-vector matches, full windows (oldest branch dropped).

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, pred_valid, pred_taken, upd_valid = 0, upd_taken = 0;
  logic [39:0] req_pc = '0;
  logic [3:0] pred_provider;
  int checks = 0, failures = 0, cycle = 0;
  int n_branch = 0, n_det = 0, n_det_ok = 0, n_mispred = 0;
  int prov_cnt [9];
  int n_t_add = 0, n_nt_add = 0, n_t_sub = 0, n_nt_sub = 0, n_base_train = 0, n_both = 0, n_drop = 0, n_drop_long = 0, n_block = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // count training events on every clock
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tab[0].op_t == hypre_pkg::TRAIN_ADD || dut.g_tab[N_TAB_OBS].op_t == hypre_pkg::TRAIN_ADD) n_t_add++;
    if (dut.g_tab[0].op_nt == hypre_pkg::TRAIN_ADD || dut.g_tab[N_TAB_OBS].op_nt == hypre_pkg::TRAIN_ADD) n_nt_add++;
    if (dut.g_tab[0].op_t == hypre_pkg::TRAIN_SUB || dut.g_tab[N_TAB_OBS].op_t == hypre_pkg::TRAIN_SUB) n_t_sub++;
    if (dut.g_tab[0].op_nt == hypre_pkg::TRAIN_SUB || dut.g_tab[N_TAB_OBS].op_nt == hypre_pkg::TRAIN_SUB) n_nt_sub++;
    if (dut.base_op != hypre_pkg::TRAIN_NONE) n_base_train++;
    if (req_valid && req_ready) begin
      if (dut.g_tab[0].u_tab.t_match && dut.g_tab[0].u_tab.nt_match) n_both++;
      if (32'(dut.ph_count) >= dut.HIST_LEN[0]) n_drop++;
      if (32'(dut.ph_count) >= dut.HIST_LEN[7]) n_drop_long++;
    end
  end

  task automatic branch(logic [39:0] pc, bit outcome, bit deterministic);
    int t0;
    // a request while a branch is in flight must be refused
    check(req_ready, "predictor not ready for a new branch");
    req_pc = pc;
    req_valid = 1;
    @(posedge clk);
    t0 = cycle;
    #1;
    req_valid = 0;
    check(pred_valid, "prediction not valid one cycle after the request");
    check(!req_ready, "ready while a branch is in flight");
    // hold a second request for one cycle: it must not be accepted
    req_valid = 1;
    req_pc = pc + 1;
    @(posedge clk);
    #1;
    req_valid = 0;
    check(!pred_valid, "pred_valid longer than one cycle");
    if (!req_ready) n_block++;
    prov_cnt[pred_provider]++;
    if (pred_taken != outcome) n_mispred++;
    if (deterministic && n_branch >= WARM) begin
      n_det++;
      if (pred_taken == outcome) n_det_ok++;
    end
    upd_taken = outcome;
    upd_valid = 1;
    @(posedge clk);
    #1;
    upd_valid = 0;
    check(req_ready, "not ready after the update");
    n_branch++;
  endtask

  initial begin
    foreach (prov_cnt[i]) prov_cnt[i] = 0;
    repeat (3) @(posedge clk);
    #1;
    rst_n = 1;
    for (int i = 0; n_branch < N_BRANCH; i++) begin
      bit a;
      a = (i % 2 == 0);
      branch(40'h100, a, 1);
      branch(a ? 40'h140 : 40'h180, a, 1);
      branch(40'h1c0, a, 1);
      branch(40'h200, 1'($urandom), 0);
      branch(40'h240, (i % 10) != 9, 1);
    end
    $display("branches=%0d mispredictions=%0d deterministic after warm-up: %0d/%0d correct",
             n_branch, n_mispred, n_det_ok, n_det);
    $display("providers: base=%0d tables=%0d %0d %0d %0d %0d %0d %0d %0d", prov_cnt[0], prov_cnt[1],
             prov_cnt[2], prov_cnt[3], prov_cnt[4], prov_cnt[5], prov_cnt[6], prov_cnt[7], prov_cnt[8]);
    $display("events: T add=%0d NT add=%0d T sub=%0d NT sub=%0d base train=%0d both match=%0d window full=%0d longest full=%0d refused=%0d",
             n_t_add, n_nt_add, n_t_sub, n_nt_sub, n_base_train, n_both, n_drop, n_drop_long, n_block);
    check(prov_cnt[0] > 0, "base predictor never provided");
    check(prov_cnt[1] + prov_cnt[2] + prov_cnt[3] + prov_cnt[4] + prov_cnt[5] + prov_cnt[6] + prov_cnt[7] + prov_cnt[8] > 0,
          "no history table ever provided");
    check(n_t_add > 0, "no addition to a Taken vector");
    check(n_nt_add > 0, "no addition to a Not-Taken vector");
    check(n_t_sub > 0, "no partial subtraction from a Taken vector");
    check(n_nt_sub > 0, "no partial subtraction from a Not-Taken vector");
    check(n_base_train > 0, "base predictor never trained");
    check(n_both > 0, "Taken and Not-Taken never matched together");
    check(n_drop > 0, "the shortest history window never filled");
    check(n_drop_long > 0, "the longest history window never filled");
    check(n_block > 0, "back-pressure never seen");
    check(n_det == 0 || n_det_ok * 100 >= n_det * MIN_ACC, $sformatf("accuracy %0d/%0d below %0d%%", n_det_ok, n_det, MIN_ACC));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_BRANCH * 4 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
