// tb_query_gen -- closes the rolling-query loop around query_gen over a random
// branch sequence: the query of a branch is the partial query prepared after
// the previous branch XOR the new branch's HV, and the next partial query is
// prepared from it. Every query is compared with the query computed from
// scratch over the last L PCs:
//     Q = XOR_{age a < L} rot(HV(PC of age a), a)
// including the start, while the window is still filling (drop = 0).
module tb_query_gen;
  localparam int unsigned HV_W = 256, PC_W = 40, L = 5;

  logic clk = 0;
  logic [HV_W-1:0] q_prev = '0, q_part, part = '0, q, hv_new;
  logic [PC_W-1:0] old_pc = '0, new_pc = '0, scratch_pc = '0;
  int n_seen = 0;
  logic drop = 0;
  logic [HV_W-1:0] scratch_hv;
  logic [PC_W-1:0] hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  query_gen #(.HV_W(HV_W), .PC_W(PC_W), .L(L)) dut (.*);
  // hashing helpers (the HV dictionary)
  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_new (.key(new_pc), .hv(hv_new));
  hv_encoder #(.KEY_W(PC_W), .HV_W(HV_W)) u_scr (.key(scratch_pc), .hv(scratch_hv));

  function automatic logic [HV_W-1:0] rot(logic [HV_W-1:0] v, int n);
    logic [HV_W-1:0] r;
    for (int i = 0; i < HV_W; i++) r[(i + n) % HV_W] = v[i];
    return r;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [HV_W-1:0] expect_q;
    for (int n = 0; n < 200; n++) begin
      // PCs drawn from a small set so that patterns repeat
      new_pc = PC_W'(32'h400 + 4 * ($urandom % 6));
      #1;
      q = part ^ hv_new;
      hist.push_front(new_pc);
      if (hist.size() > L) void'(hist.pop_back());
      n_seen++;
      expect_q = '0;
      for (int a = 0; a < hist.size(); a++) begin
        scratch_pc = hist[a];
        #1;
        expect_q ^= rot(scratch_hv, a);
      end
      check(q == expect_q, $sformatf("branch %0d: rolling query differs from direct sum", n));
      // prepare the partial query of the next branch
      q_prev = q;
      drop   = n_seen >= L;
      old_pc = drop ? hist[L-1] : PC_W'({$urandom, $urandom});
      #1;
      part = q_part;
      @(posedge clk);
    end
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
