// tb_hv_encoder -- checks the PC-to-hypervector hash against an independent
// re-implementation of the mixer and checks the randomness property the
// predictor relies on: hypervectors of different keys agree in about half of
// their elements (within 6 standard deviations), equal keys in all.
module tb_hv_encoder;
  localparam int unsigned KEY_W = 40;
  localparam int unsigned HV_W  = 4096;

  logic [KEY_W-1:0] key_a, key_b;
  logic [HV_W-1:0]  hv_a, hv_b;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  hv_encoder #(.KEY_W(KEY_W), .HV_W(HV_W)) dut_a (.key(key_a), .hv(hv_a));
  hv_encoder #(.KEY_W(KEY_W), .HV_W(HV_W)) dut_b (.key(key_b), .hv(hv_b));

  function automatic logic [63:0] ref_mix(logic [63:0] x);
    logic [63:0] t;
    t = x ^ {31'b0, x[63:31]};
    t = t + ({t[54:0], 9'b0} ^ 64'hD6E8FEB86659FD93);
    t = t ^ {27'b0, t[63:27]} ^ {t[12:0], t[63:13]};
    t = t + ({t[46:0], 17'b0} ^ 64'hA0761D6478BD642F);
    t = t ^ {33'b0, t[63:33]};
    t = t + {t[58:0], 5'b0};
    t = t ^ {29'b0, t[63:29]};
    return t;
  endfunction

  function automatic logic [HV_W-1:0] ref_hv(logic [KEY_W-1:0] k);
    logic [HV_W-1:0] v;
    logic [63:0] k0;
    k0 = ref_mix({{(64-KEY_W){1'b0}}, k});
    for (int c = 0; c < HV_W / 64; c++)
      v[c*64 +: 64] = ref_mix(k0 ^ (64'h9E3779B97F4A7C15 * 64'(c + 1)));
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int d;
    for (int n = 0; n < 200; n++) begin
      key_a = {$urandom, $urandom};
      case (n % 4)
        0: key_b = key_a + 1;
        1: key_b = key_a ^ (KEY_W'(1) << ($urandom % KEY_W));
        2: key_b = key_a + 4;
        default: key_b = {$urandom, $urandom};
      endcase
      #1;
      check(hv_a == ref_hv(key_a), $sformatf("hash of %h differs from reference", key_a));
      d = $countones(hv_a ^ hv_b);
      check(d >= 1856 && d <= 2240, $sformatf("keys %h %h: distance %0d not near 2048", key_a, key_b, d));
      key_b = key_a;
      #1;
      check(hv_a == hv_b, "equal keys give different vectors");
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
