// tb_longest_match_select -- exhaustive over all hit / direction / base
// combinations for eight tables: the prediction must come from the highest
// hitting table, else from the base predictor, and the provider code must
// name that source.
module tb_longest_match_select;
  localparam int unsigned N = 8;

  logic [N-1:0] hit, dir;
  logic base_dir, pred;
  logic [3:0] provider;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  longest_match_select #(.N_TABLES(N)) dut (.*);

  initial begin
    for (int h = 0; h < 256; h++)
      for (int d = 0; d < 256; d++)
        for (int b = 0; b < 2; b++) begin
          int top;
          logic exp_pred;
          hit = 8'(h); dir = 8'(d); base_dir = 1'(b);
          #1;
          top = -1;
          for (int i = 0; i < N; i++) if (hit[i]) top = i;
          exp_pred = (top < 0) ? base_dir : dir[top];
          checks++;
          if (pred !== exp_pred || int'(provider) != top + 1) begin
            failures++;
            if (failures < 10) $display("FAIL: hit=%b dir=%b base=%b -> pred=%b prov=%0d", hit, dir, base_dir, pred, provider);
          end
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
