// tb_ssit: self-checking test of the Store Set ID Table.
// Random lookups, violation trainings and clears are applied; a reference
// table kept in the testbench, updated with the Store Sets rules, gives the
// expected lookup result every cycle. Directed checks cover the four
// training cases and PC aliasing (two PCs SSIT_ENTRIES*4 bytes apart share
// an entry).
module tb_ssit;
  import mdp_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned NL = 32;

  logic clk = 0, rst_n = 0;
  logic clear = 0;
  pc_t  lookup_pc = '0;
  logic lookup_valid;
  logic [4:0] lookup_ssid;
  logic viol_valid = 0;
  pc_t  viol_load_pc = '0, viol_store_pc = '0;

  int checks = 0, failures = 0;

  ssit #(.SSIT_ENTRIES(N), .LFST_ENTRIES(NL)) dut (.*);

  always #5 clk = ~clk;

  bit      rv [N];
  int      rs [N];

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int idx(pc_t pc);
    return int'((pc / 4) % N);
  endfunction

  task automatic model_train(pc_t lpc, pc_t spc);
    int li = idx(lpc), si = idx(spc), s;
    if (!rv[li] && !rv[si])      s = int'((lpc / 4) % NL);
    else if (rv[li] && !rv[si])  s = rs[li];
    else if (!rv[li] && rv[si])  s = rs[si];
    else                         s = (rs[li] < rs[si]) ? rs[li] : rs[si];
    rv[li] = 1; rs[li] = s;
    rv[si] = 1; rs[si] = s;
  endtask

  task automatic expect_lookup(pc_t pc);
    lookup_pc = pc;
    #1;
    check("lookup valid", lookup_valid == rv[idx(pc)]);
    if (rv[idx(pc)]) check("lookup ssid", int'(lookup_ssid) == rs[idx(pc)]);
  endtask

  task automatic train(pc_t lpc, pc_t spc);
    @(negedge clk);
    viol_valid = 1; viol_load_pc = lpc; viol_store_pc = spc;
    @(negedge clk);
    viol_valid = 0;
    model_train(lpc, spc);
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (rv[i]) begin rv[i] = 0; rs[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // directed: empty table
    expect_lookup(64'h1000);
    check("empty table", lookup_valid == 0);
    // case 00: new set from load PC 0x1008 -> ssid (0x1008/4)%32 = 2
    train(64'h1008, 64'h2010);
    expect_lookup(64'h2010);
    check("new ssid", lookup_valid && lookup_ssid == 5'd2);
    // case 10: load has a set, store joins it
    train(64'h1008, 64'h3014);
    expect_lookup(64'h3014);
    check("store joins", lookup_valid && lookup_ssid == 5'd2);
    // case 01: store has a set, load joins it
    train(64'h4040, 64'h2010);
    expect_lookup(64'h4040);
    check("load joins", lookup_valid && lookup_ssid == 5'd2);
    // aliasing PC 0x1008 + 32*4
    expect_lookup(64'h1008 + 64'd128);
    check("alias shares entry", lookup_valid && lookup_ssid == 5'd2);
    // case 11: merge to the smaller ssid
    train(64'h1058, 64'h5000);  // new set 22 for pcs 0x1058(idx 22), 0x5000(idx 0)
    expect_lookup(64'h5000);
    check("second set", lookup_valid && lookup_ssid == 5'd22);
    train(64'h1058, 64'h2010);  // both valid: 22 vs 2 -> 2
    expect_lookup(64'h1058);
    check("merge smaller", lookup_valid && lookup_ssid == 5'd2);
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (rv[i]) rv[i] = 0;
    expect_lookup(64'h2010);
    check("cleared", lookup_valid == 0);
    // random
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      viol_valid = 0; clear = 0;
      if ($urandom_range(0, 199) == 0) begin
        clear = 1;
      end else if ($urandom_range(0, 3) == 0) begin
        viol_valid = 1;
        viol_load_pc  = pc_t'($urandom_range(0, 255)) * 4;
        viol_store_pc = pc_t'($urandom_range(0, 255)) * 4;
      end
      lookup_pc = pc_t'($urandom_range(0, 255)) * 4;
      #1;
      check("rand valid", lookup_valid == rv[idx(lookup_pc)]);
      if (rv[idx(lookup_pc)]) check("rand ssid", int'(lookup_ssid) == rs[idx(lookup_pc)]);
      @(posedge clk); #1;
      if (clear) foreach (rv[i]) rv[i] = 0;
      else if (viol_valid) model_train(viol_load_pc, viol_store_pc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
