// tb_sdm_vector -- drives random add / partial-subtract steps with random
// masks into a small outcome vector and compares its sign bits every cycle
// with a counter model kept in the testbench. Also checks the two properties
// the predictor relies on: one addition into an empty vector reproduces the
// query outside the randomised elements, and counters saturate.
module tb_sdm_vector;
  localparam int unsigned HV_W  = 64;
  localparam int unsigned CNT_W = 4;

  logic clk = 0, rst_n = 0;
  logic add_en = 0, sub_en = 0;
  logic [HV_W-1:0] query = '0, rand_mask = '0, rand_val = '0, erase_mask = '0, bits;
  int model [HV_W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sdm_vector #(.HV_W(HV_W), .CNT_W(CNT_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int sat(int v);
    return v > 7 ? 7 : (v < -8 ? -8 : v);
  endfunction

  task automatic apply(bit a, bit s);
    add_en = a;
    sub_en = s;
    @(posedge clk);
    #1;
    for (int i = 0; i < HV_W; i++) begin
      if (a) model[i] = sat(model[i] + (((rand_mask[i] ? rand_val[i] : query[i]) == 1'b1) ? 1 : -1));
      else if (s && erase_mask[i]) model[i] = sat(model[i] + (query[i] ? -1 : 1));
    end
    add_en = 0;
    sub_en = 0;
  endtask

  function automatic logic [HV_W-1:0] model_bits();
    logic [HV_W-1:0] b;
    for (int i = 0; i < HV_W; i++) b[i] = model[i] >= 0;
    return b;
  endfunction

  initial begin
    for (int i = 0; i < HV_W; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    check(bits == '1, "empty vector should read all ones");
    // one addition into the empty vector
    query = {$urandom, $urandom};
    rand_mask = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
    rand_val = {$urandom, $urandom};
    apply(1, 0);
    check((bits & ~rand_mask) == (query & ~rand_mask), "single add does not reproduce the query");
    check(bits == model_bits(), "after single add");
    // saturation: 20 additions of the same query, no randomisation
    rand_mask = '0;
    repeat (20) apply(1, 0);
    check(bits == query, "saturated vector differs from query");
    // three full subtractions do not flip a saturated vector ...
    erase_mask = '1;
    repeat (3) apply(0, 1);
    check(bits == query, "partial removal flipped saturated elements");
    // ... a further twelve do
    repeat (12) apply(0, 1);
    check(bits == ~query, "repeated removal did not invert the vector");
    // random mix against the model
    for (int n = 0; n < 400; n++) begin
      bit a, s;
      query = {$urandom, $urandom};
      rand_mask = {$urandom, $urandom} & {$urandom, $urandom};
      rand_val = {$urandom, $urandom};
      erase_mask = {$urandom, $urandom};
      a = 1'($urandom);
      s = 1'($urandom);
      apply(a, s);
      check(bits == model_bits(), $sformatf("step %0d add=%0d sub=%0d", n, a, s));
    end
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
