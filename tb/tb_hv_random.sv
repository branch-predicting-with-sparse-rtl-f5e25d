// tb_hv_random -- statistics of the training masks at full size (4096 bits):
// rand_mask density 1/16, rand_val and erase_mask density 1/2 (each within
// 6 standard deviations), masks stable without `step`, and successive masks
// unrelated (agreement near half).
module tb_hv_random;
  localparam int unsigned HV_W = 4096;

  logic clk = 0, rst_n = 0, step = 0;
  logic [HV_W-1:0] rand_mask, rand_val, erase_mask, prev;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hv_random #(.HV_W(HV_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int m, v, e, same;
      #1;
      m = $countones(rand_mask);
      v = $countones(rand_val);
      e = $countones(erase_mask);
      check(m >= 256 - 93 && m <= 256 + 93, $sformatf("rand_mask density %0d/4096", m));
      check(v >= 2048 - 192 && v <= 2048 + 192, $sformatf("rand_val density %0d/4096", v));
      check(e >= 2048 - 192 && e <= 2048 + 192, $sformatf("erase_mask density %0d/4096", e));
      prev = erase_mask;
      step = 0;
      @(posedge clk);
      #1;
      check(erase_mask == prev, "mask changed without step");
      step = 1;
      @(posedge clk);
      #1;
      step = 0;
      same = HV_W - $countones(erase_mask ^ prev);
      check(same >= 2048 - 192 && same <= 2048 + 192, $sformatf("successive masks agree in %0d", same));
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
