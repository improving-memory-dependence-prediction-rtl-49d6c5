// tb_lfst: self-checking test of the Last Fetched Store Table.
// Random insertions, execution releases, squashes and clears are applied to
// the table and to a reference copy kept here; every cycle a random set ID
// is looked up and compared with the reference. Directed checks come first.
module tb_lfst;
  import mdp_pkg::*;

  localparam int unsigned NL = 32;

  logic clk = 0, rst_n = 0;
  logic clear = 0;
  logic [4:0] lk_ssid = '0, ins_ssid = '0;
  logic lk_valid;
  seq_t lk_seq, ins_seq = '0, exec_seq = '0, squash_seq = '0;
  logic ins_valid = 0, exec_valid = 0, squash_valid = 0;

  int checks = 0, failures = 0;

  lfst #(.LFST_ENTRIES(NL)) dut (.*);

  always #5 clk = ~clk;

  bit rv [NL];
  int rq [NL];

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic cycle_model();
    for (int i = 0; i < NL; i++) begin
      if (clear) rv[i] = 0;
      else if (ins_valid && int'(ins_ssid) == i) begin rv[i] = 1; rq[i] = int'(ins_seq); end
      else if (rv[i] && ((exec_valid && rq[i] == int'(exec_seq)) ||
                         (squash_valid && rq[i] >= int'(squash_seq)))) rv[i] = 0;
    end
  endtask

  task automatic step();
    @(posedge clk); #1;
    cycle_model();
    @(negedge clk);
    clear = 0; ins_valid = 0; exec_valid = 0; squash_valid = 0;
  endtask

  task automatic look(int s);
    lk_ssid = 5'(s);
    #1;
    check("lk valid", lk_valid == rv[s]);
    if (rv[s]) check("lk seq", int'(lk_seq) == rq[s]);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq;
    foreach (rv[i]) begin rv[i] = 0; rq[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    look(3); check("empty", !lk_valid);
    ins_valid = 1; ins_ssid = 3; ins_seq = 100; step();
    look(3); check("inserted", lk_valid && lk_seq == 100);
    ins_valid = 1; ins_ssid = 3; ins_seq = 104; step();
    look(3); check("replaced by younger", lk_valid && lk_seq == 104);
    exec_valid = 1; exec_seq = 100; step();
    look(3); check("old store exec keeps entry", lk_valid);
    exec_valid = 1; exec_seq = 104; step();
    look(3); check("exec releases", !lk_valid);
    ins_valid = 1; ins_ssid = 7; ins_seq = 200; step();
    squash_valid = 1; squash_seq = 201; step();
    look(7); check("older survives squash", lk_valid);
    squash_valid = 1; squash_seq = 200; step();
    look(7); check("squash removes", !lk_valid);
    ins_valid = 1; ins_ssid = 9; ins_seq = 300; step();
    clear = 1; step();
    look(9); check("clear", !lk_valid);
    // random
    seq = 1000;
    for (int t = 0; t < 3000; t++) begin
      if ($urandom_range(0, 299) == 0) clear = 1;
      if ($urandom_range(0, 1) == 0) begin
        ins_valid = 1; ins_ssid = 5'($urandom_range(0, NL - 1)); seq += 1; ins_seq = seq_t'(seq);
      end
      if ($urandom_range(0, 2) == 0) begin
        exec_valid = 1; exec_seq = seq_t'(seq - $urandom_range(0, 40));
      end
      if (!ins_valid && $urandom_range(0, 39) == 0) begin
        squash_valid = 1; squash_seq = seq_t'(seq - $urandom_range(0, 20));
      end
      look($urandom_range(0, NL - 1));
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
