// tb_hd_base_predictor -- the full-size HD base predictor (1024-element
// vector, 2-bit counters, 2048 x 4-bit local histories) against a reference
// model in the testbench: local history array, query = hash({history, PC}),
// counter array, similarity, match / marginal rule and training rule. The
// prediction is compared at every request, the training action at every
// update. Four branches with different local patterns (always taken, never
// taken, alternating, period three) run interleaved; after warm-up each must
// be predicted correctly most of the time.
module tb_hd_base_predictor;
  timeunit 1ns;
  timeprecision 100ps;
  import hypre_pkg::*;
  localparam int unsigned PC_W = 40, HV_W = 1024, ENTRIES = 2048;
  localparam int THR = 512 + 64, HIGH = 512 + 128, LOW = 512;

  logic clk = 0, rst_n = 0, req = 0, upd = 0, taken = 0, pred;
  logic [PC_W-1:0] pc = '0;
  logic [4+PC_W-1:0] key = '0;
  logic [HV_W-1:0] key_hv;
  train_op_e op;

  logic [3:0] lht [ENTRIES];
  int cnt [HV_W];
  int checks = 0, failures = 0;
  int n_add = 0, n_sub = 0, n_none = 0;
  int correct [4], total [4];
  always #5 clk = ~clk;

  hd_base_predictor #(.PC_W(PC_W)) dut (.*);
  hv_encoder #(.KEY_W(4 + PC_W), .HV_W(HV_W)) u_ref (.key(key), .hv(key_hv));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int sat2(int v);
    return v > 1 ? 1 : (v < -2 ? -2 : v);
  endfunction

  initial begin
    int pcs [4] = '{'h1000, 'h2004, 'h3008, 'h400c};
    int occ [4] = '{0, 0, 0, 0};
    foreach (lht[i]) lht[i] = '0;
    foreach (cnt[i]) cnt[i] = 0;
    foreach (correct[i]) begin correct[i] = 0; total[i] = 0; end
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1;
    for (int n = 0; n < 1200; n++) begin
      int b, idx, s;
      bit outcome, exp_pred, marginal, train;
      train_op_e exp_op;
      b = (n % 5 == 4) ? int'($urandom % 4) : n % 4;
      case (b)
        0: outcome = 1;
        1: outcome = 0;
        2: outcome = occ[2] % 2 == 0;
        default: outcome = occ[3] % 3 != 2;
      endcase
      occ[b]++;
      pc  = PC_W'(pcs[b]);
      idx = pcs[b] / 4 % ENTRIES;
      key = {lht[idx], pc};
      req = 1;
      #1;
      s = 0;
      for (int i = 0; i < HV_W; i++) s += ((cnt[i] >= 0) == key_hv[i]) ? 1 : 0;
      exp_pred = s >= THR;
      marginal = s >= LOW && s < HIGH;
      check(pred == exp_pred, $sformatf("branch %0d pc %h: pred %b expected %b (sim %0d)", n, pc, pred, exp_pred, s));
      if (n >= 600) begin
        total[b]++;
        if (pred == outcome) correct[b]++;
      end
      @(posedge clk);
      #1;
      req = 0;
      upd = 1;
      taken = outcome;
      train = (exp_pred != outcome) || marginal;
      exp_op = !train ? TRAIN_NONE : (outcome ? TRAIN_ADD : TRAIN_SUB);
      #1;
      check(op == exp_op, $sformatf("branch %0d: op %s expected %s", n, op.name(), exp_op.name()));
      case (exp_op)
        TRAIN_ADD: n_add++;
        TRAIN_SUB: n_sub++;
        default:   n_none++;
      endcase
      @(posedge clk);
      #1;
      upd = 0;
      if (exp_op != TRAIN_NONE)
        for (int i = 0; i < HV_W; i++)
          cnt[i] = sat2(cnt[i] + ((key_hv[i] == (exp_op == TRAIN_ADD)) ? 1 : -1));
      lht[idx] = {lht[idx][2:0], outcome};
    end
    $display("adds=%0d subs=%0d none=%0d", n_add, n_sub, n_none);
    for (int b = 0; b < 4; b++) begin
      $display("branch %0d: %0d/%0d correct", b, correct[b], total[b]);
      check(correct[b] * 10 >= total[b] * 9, $sformatf("branch %0d not learned", b));
    end
    check(n_add > 0 && n_sub > 0 && n_none > 0, "training cases not all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
