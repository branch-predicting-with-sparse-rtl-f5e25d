// tb_path_history -- pushes 5000 random PCs into the full-size (4094-entry)
// path history and, after every push, compares each table's tap with a queue
// model (the PC of age HIST_LEN[t]-1) and the fill count with min(pushes, 4094).
// Pushes are interleaved with idle cycles, which must change nothing.
module tb_path_history;
  import hypre_pkg::*;
  localparam int unsigned PC_W = 40, DEPTH = 4094;

  logic clk = 0, rst_n = 0, push = 0;
  logic [PC_W-1:0] pc_in = '0;
  logic [N_TABLES-1:0][PC_W-1:0] tap_pc;
  logic [11:0] count;
  logic [PC_W-1:0] hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  path_history #(.PC_W(PC_W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic compare(int n);
    check(int'(count) == ((hist.size() < DEPTH) ? hist.size() : DEPTH), $sformatf("push %0d: count %0d", n, count));
    for (int t = 0; t < N_TABLES; t++) begin
      int age = CFG_HIST_LEN[t] - 1;
      if (age < hist.size())
        check(tap_pc[t] == hist[age], $sformatf("push %0d tap %0d: %h expected %h", n, t, tap_pc[t], hist[age]));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    check(count == 0, "count not zero after reset");
    for (int n = 0; n < 5000; n++) begin
      pc_in = {$urandom, $urandom};
      push = 1;
      @(posedge clk);
      #1;
      push = 0;
      hist.push_front(pc_in);
      if (hist.size() > DEPTH) void'(hist.pop_back());
      if (n % 7 == 0) begin
        @(posedge clk);
        #1;
      end
      if (n < 100 || n % 10 == 0 || n > 4080) compare(n);
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
