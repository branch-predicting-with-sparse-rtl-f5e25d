// tb_local_history_table -- random reads and outcome shifts on the full-size
// 2048 x 4-bit table, compared with an array model; includes back-to-back
// writes to one entry and a read of the written entry in the same cycle.
module tb_local_history_table;
  localparam int unsigned ENTRIES = 2048, LHIST_W = 4;

  logic clk = 0, rst_n = 0, wr_en = 0, wr_taken = 0;
  logic [10:0] rd_idx = '0, wr_idx = '0;
  logic [3:0] rd_hist;
  logic [3:0] model [ENTRIES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  local_history_table #(.ENTRIES(ENTRIES), .LHIST_W(LHIST_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      wr_en    = 1'($urandom);
      wr_idx   = (n % 5 < 2) ? 11'd7 : 11'($urandom % 32);
      wr_taken = 1'($urandom);
      rd_idx   = (n % 3 == 0) ? wr_idx : 11'($urandom % 32);
      #1;
      check(rd_hist == model[rd_idx], $sformatf("read %0d: %b expected %b", rd_idx, rd_hist, model[rd_idx]));
      @(posedge clk);
      if (wr_en) model[wr_idx] = {model[wr_idx][2:0], wr_taken};
      #1;
    end
    wr_en = 0;
    for (int i = 0; i < 32; i++) begin
      rd_idx = 11'(i);
      #1;
      check(rd_hist == model[i], $sformatf("final entry %0d", i));
    end
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
