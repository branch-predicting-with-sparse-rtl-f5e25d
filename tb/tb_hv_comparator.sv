// tb_hv_comparator -- builds stored vectors that agree with a random query in
// an exactly known number of elements and checks the similarity count and the
// match / confident flags at and around both thresholds (2176 and 2304 of
// 4096 elements).
module tb_hv_comparator;
  localparam int unsigned HV_W = 4096;
  localparam int unsigned THR  = 2176;   // 4096/2 + 2*64
  localparam int unsigned HIGH = 2304;   // 4096/2 + 4*64

  logic [HV_W-1:0] query, stored;
  logic [12:0] sim;
  logic match, confident;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  hv_comparator #(.HV_W(HV_W)) dut (.query, .stored, .sim, .match, .confident);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // stored = query with exactly HV_W-k elements flipped (chosen by a random
  // permutation), so exactly k elements agree.
  task automatic try_k(int k);
    int perm [HV_W];
    for (int i = 0; i < HV_W; i++) perm[i] = i;
    for (int i = HV_W - 1; i > 0; i--) begin
      int j, t;
      j = $urandom % (i + 1);
      t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < HV_W; i++) query[i] = 1'($urandom);
    stored = query;
    for (int i = 0; i < HV_W - k; i++) stored[perm[i]] = ~stored[perm[i]];
    #1;
    check(int'(sim) == k, $sformatf("k=%0d: sim=%0d", k, sim));
    check(match == (k >= THR), $sformatf("k=%0d: match=%0d", k, match));
    check(confident == (k >= HIGH), $sformatf("k=%0d: confident=%0d", k, confident));
  endtask

  initial begin
    int ks [12] = '{0, 1, 2048, THR - 1, THR, THR + 1, HIGH - 1, HIGH, HIGH + 1, 4095, 4096, 3000};
    foreach (ks[i]) try_k(ks[i]);
    repeat (40) try_k($urandom % (HV_W + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
