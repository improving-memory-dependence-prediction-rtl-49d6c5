// tb_mdp_clear_timer: checks that the clear pulse comes exactly on every
// CLEAR_PERIOD-th memory operation (7808, the small configuration) while
// operations arrive on random cycles, and never in between.
module tb_mdp_clear_timer;
  localparam int unsigned P = 7808;

  logic clk = 0, rst_n = 0, mem_op = 0, clear;
  logic [12:0] count;
  int checks = 0, failures = 0;

  mdp_clear_timer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ops = 0, clears = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (clears < 3) begin
      @(negedge clk);
      mem_op = ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (clear != (mem_op && ((ops + 1) % P == 0))) begin
        failures++;
        $display("FAIL clear=%0b after %0d ops", clear, ops);
      end
      if (mem_op) ops++;
      if (clear) clears++;
    end
    checks++;
    if (ops != 3 * P) begin
      failures++;
      $display("FAIL ops=%0d", ops);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
