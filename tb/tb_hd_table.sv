// tb_hd_table -- one history table (512-element vectors, window L = 4) run over
// a branch stream whose outcomes depend on the recent path, against a
// reference model kept in the testbench: the query from scratch over the
// last L PCs, Taken / Not-Taken counter arrays, similarities, the match rule
// and the training rule. hit/dir are compared at every request and the
// training actions at every update. The stream must produce hits, both-vector
// matches, additions and partial subtractions.
module tb_hd_table;
  timeunit 1ns;
  timeprecision 100ps;
  import hypre_pkg::*;
  localparam int unsigned HV_W = 512, CNT_W = 4, PC_W = 40, L = 4;
  localparam int THR  = 256 + 2 * 22;  // N/2 + 2*floor(sqrt(N))
  localparam int HIGH = 256 + 4 * 22;

  logic clk = 0, rst_n = 0;
  logic req = 0, drop = 0, hit, dir, upd = 0, taken = 0;
  logic [HV_W-1:0] hv_new, rand_mask = '0, rand_val = '0, erase_mask = '0;
  logic [PC_W-1:0] old_pc = '0, new_pc = '0, scratch_pc = '0;
  logic [HV_W-1:0] scratch_hv;
  train_op_e op_t, op_nt;

  int cnt_t [HV_W], cnt_nt [HV_W];
  logic [PC_W-1:0] hist [$];
  int checks = 0, failures = 0;
  int n_hit = 0, n_both = 0, n_add = 0, n_sub = 0, n_correct_late = 0;
  always #5 clk = ~clk;

  hd_table #(.HV_W(HV_W), .CNT_W(CNT_W), .PC_W(PC_W), .L(L)) dut (.*);
  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_new (.key(new_pc), .hv(hv_new));
  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_scr (.key(scratch_pc), .hv(scratch_hv));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [HV_W-1:0] rot(logic [HV_W-1:0] v, int n);
    logic [HV_W-1:0] r;
    for (int i = 0; i < HV_W; i++) r[(i + n) % HV_W] = v[i];
    return r;
  endfunction

  function automatic int sat(int v);
    return v > 7 ? 7 : (v < -8 ? -8 : v);
  endfunction

  function automatic int sim_of(logic [HV_W-1:0] q, ref int c [HV_W]);
    int s = 0;
    for (int i = 0; i < HV_W; i++) s += ((c[i] >= 0) == q[i]) ? 1 : 0;
    return s;
  endfunction

  initial begin
    logic [HV_W-1:0] q;
    int st, snt;
    bit mt, mnt, ct, cnt_, exp_hit, exp_dir, outcome;
    train_op_e et, ent;
    int pcs [6] = '{'h100, 'h104, 'h108, 'h10c, 'h200, 'h204};
    foreach (cnt_t[i]) begin cnt_t[i] = 0; cnt_nt[i] = 0; end
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      // request
      new_pc = PC_W'(($urandom % 8 == 0) ? pcs[$urandom % 6] : pcs[n % 6]);
      drop   = 1'($urandom);   // must not matter at a request
      old_pc = {$urandom, $urandom};
      req    = 1;
      hist.push_front(new_pc);
      if (hist.size() > L) void'(hist.pop_back());
      q = '0;
      for (int a = 0; a < hist.size(); a++) begin
        scratch_pc = hist[a];
        #0.1;
        q ^= rot(scratch_hv, a);
      end
      #1;
      st  = sim_of(q, cnt_t);
      snt = sim_of(q, cnt_nt);
      mt = st >= THR; mnt = snt >= THR; ct = st >= HIGH; cnt_ = snt >= HIGH;
      exp_hit = mt | mnt;
      exp_dir = mt & (!mnt | st >= snt);
      check(hit == exp_hit && (!exp_hit || dir == exp_dir),
            $sformatf("branch %0d: hit/dir %b%b expected %b%b (sims %0d %0d)", n, hit, dir, exp_hit, exp_dir, st, snt));
      if (exp_hit) n_hit++;
      if (mt && mnt) n_both++;
      // outcome: taken unless the two previous PCs were 0x104 then 0x108
      outcome = !(hist.size() >= 3 && hist[2] == 'h104 && hist[1] == 'h108);
      if ($urandom % 10 == 0) outcome = ~outcome;
      if (n > 400 && exp_hit && exp_dir == outcome && new_pc == 'h10c) n_correct_late++;
      @(posedge clk);
      #1;
      req = 0;
      check(dut.q_reg == q, $sformatf("branch %0d: query differs from the direct sum", n));
      // update
      rand_mask  = 512'($urandom) ;
      for (int w = 0; w < HV_W / 32; w++) begin
        rand_mask[w*32 +: 32]  = $urandom & $urandom & $urandom & $urandom;
        rand_val[w*32 +: 32]   = $urandom;
        erase_mask[w*32 +: 32] = $urandom;
      end
      taken = outcome;
      // the path-history entry that leaves the window with the next branch
      drop   = n + 1 >= L;
      old_pc = drop ? hist[L-1] : '0;
      upd = 1;
      et = TRAIN_NONE; ent = TRAIN_NONE;
      if (taken) begin
        if (!ct) et = TRAIN_ADD;
        if (mnt) ent = TRAIN_SUB;
      end else begin
        if (!cnt_) ent = TRAIN_ADD;
        if (mt) et = TRAIN_SUB;
      end
      #1;
      check(op_t == et && op_nt == ent, $sformatf("branch %0d: ops %s %s expected %s %s", n, op_t.name(), op_nt.name(), et.name(), ent.name()));
      if (et == TRAIN_ADD || ent == TRAIN_ADD) n_add++;
      if (et == TRAIN_SUB || ent == TRAIN_SUB) n_sub++;
      @(posedge clk);
      #1;
      upd = 0;
      for (int i = 0; i < HV_W; i++) begin
        logic bt;
        bt = rand_mask[i] ? rand_val[i] : q[i];
        if (et == TRAIN_ADD) cnt_t[i] = sat(cnt_t[i] + (bt ? 1 : -1));
        if (et == TRAIN_SUB && erase_mask[i]) cnt_t[i] = sat(cnt_t[i] + (q[i] ? -1 : 1));
        if (ent == TRAIN_ADD) cnt_nt[i] = sat(cnt_nt[i] + (bt ? 1 : -1));
        if (ent == TRAIN_SUB && erase_mask[i]) cnt_nt[i] = sat(cnt_nt[i] + (q[i] ? -1 : 1));
      end
    end
    $display("hits=%0d both=%0d adds=%0d subs=%0d late_correct=%0d", n_hit, n_both, n_add, n_sub, n_correct_late);
    check(n_hit > 0, "no table hit");
    check(n_both > 0, "T and NT never matched together");
    check(n_add > 0 && n_sub > 0, "training additions or subtractions never happened");
    check(n_correct_late > 10, "table did not learn the path-dependent branch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
