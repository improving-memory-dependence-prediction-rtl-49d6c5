// tb_store_sets_mdp: directed test of the Store Sets predictor with PND
// labels (tables of 32 entries, clear period shortened to 40 operations).
// Covers: first encounter (no prediction), training by a violation, a load
// waiting on the last fetched store of its set, store-to-store ordering,
// the PND skip, the disabled-label mode, no training by a labelled load,
// a false dependence from PC aliasing, release on store execution,
// squash, the periodic clear and the statistic counters.
module tb_store_sets_mdp;
  import mdp_pkg::*;

  logic clk = 0, rst_n = 0, pnd_enable = 1;
  logic disp_valid = 0;
  mem_op_e disp_op = OP_LOAD;
  logic disp_pnd = 0;
  pc_t  disp_pc = '0;
  seq_t disp_seq = '0;
  logic dep_valid;
  seq_t dep_seq;
  logic st_exec_valid = 0;
  seq_t st_exec_seq = '0;
  logic viol_valid = 0, viol_load_pnd = 0;
  pc_t  viol_load_pc = '0, viol_store_pc = '0;
  logic squash_valid = 0;
  seq_t squash_seq = '0;
  logic clear;
  logic [31:0] lookup_count, pnd_skip_count, train_count, pnd_viol_count, clear_count;

  int checks = 0, failures = 0;
  int seq = 0;

  store_sets_mdp #(.SSIT_ENTRIES(32), .LFST_ENTRIES(32), .CLEAR_PERIOD(40)) dut (.*);

  always #5 clk = ~clk;

  localparam pc_t LD = 64'h400100, ST = 64'h400200, LD2 = 64'h400300, ST2 = 64'h400404;
  localparam pc_t LD_ALIAS = LD + 64'd128;  // same SSIT index as LD

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // dispatch one op; returns the prediction seen in that cycle
  task automatic dispatch(mem_op_e op, pc_t pc, logic pnd, output logic dv, output seq_t ds, output int s);
    @(negedge clk);
    seq++;
    s = seq;
    disp_valid = 1; disp_op = op; disp_pc = pc; disp_pnd = pnd; disp_seq = seq_t'(seq);
    #1;
    dv = dep_valid; ds = dep_seq;
    @(negedge clk);
    disp_valid = 0;
  endtask

  task automatic violate(pc_t lpc, pc_t spc, logic pnd);
    @(negedge clk);
    viol_valid = 1; viol_load_pc = lpc; viol_store_pc = spc; viol_load_pnd = pnd;
    @(negedge clk);
    viol_valid = 0;
  endtask

  task automatic exec_store(int s);
    @(negedge clk);
    st_exec_valid = 1; st_exec_seq = seq_t'(s);
    @(negedge clk);
    st_exec_valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic dv; seq_t ds; int s_st, s_ld, s_st2, lk0, sk0, n_clear;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. untrained: no prediction
    dispatch(OP_STORE, ST, 0, dv, ds, s_st);
    dispatch(OP_LOAD, LD, 0, dv, ds, s_ld);
    check("untrained load free", !dv);
    check("two lookups", lookup_count == 2);
    // 2. violation trains (LD, ST)
    violate(LD, ST, 0);
    check("trained", train_count == 1);
    // 3. store then load of the set: load waits for the store
    dispatch(OP_STORE, ST, 0, dv, ds, s_st);
    check("first store of set free", !dv);
    dispatch(OP_LOAD, LD, 0, dv, ds, s_ld);
    check("load predicted dependent", dv && int'(ds) == s_st);
    // 4. a second store of the set waits for the first
    dispatch(OP_STORE, ST, 0, dv, ds, s_st2);
    check("store-store order", dv && int'(ds) == s_st);
    // 5. PND load with the same PC: no lookup, no dependence
    lk0 = lookup_count; sk0 = pnd_skip_count;
    dispatch(OP_LOAD, LD, 1, dv, ds, s_ld);
    check("pnd free", !dv);
    check("pnd no lookup", lookup_count == lk0 && pnd_skip_count == sk0 + 1);
    // 6. labels disabled: same load is predicted again
    pnd_enable = 0;
    dispatch(OP_LOAD, LD, 1, dv, ds, s_ld);
    check("pnd disabled -> predicted", dv && int'(ds) == s_st2);
    pnd_enable = 1;
    // 7. false dependence through an aliasing PC
    dispatch(OP_LOAD, LD_ALIAS, 0, dv, ds, s_ld);
    check("aliasing PC false dependence", dv && int'(ds) == s_st2);
    dispatch(OP_LOAD, LD_ALIAS, 1, dv, ds, s_ld);
    check("aliasing PC labelled avoids it", !dv);
    // 8. execution of the last store releases the set
    exec_store(s_st2);
    dispatch(OP_LOAD, LD, 0, dv, ds, s_ld);
    check("released after exec", !dv);
    // 9. labelled load violation is not trained
    violate(LD2, ST2, 1);
    check("pnd violation counted", pnd_viol_count == 1 && train_count == 1);
    dispatch(OP_STORE, ST2, 0, dv, ds, s_st);
    dispatch(OP_LOAD, LD2, 0, dv, ds, s_ld);
    check("pnd violation not trained", !dv);
    // ... but with labels disabled it is
    pnd_enable = 0;
    violate(LD2, ST2, 1);
    pnd_enable = 1;
    check("disabled-label violation trained", train_count == 2);
    dispatch(OP_STORE, ST2, 0, dv, ds, s_st);
    dispatch(OP_LOAD, LD2, 0, dv, ds, s_ld);
    check("now predicted", dv && int'(ds) == s_st);
    // 10. squash of the store removes it from the LFST
    dispatch(OP_STORE, ST, 0, dv, ds, s_st);
    @(negedge clk); squash_valid = 1; squash_seq = seq_t'(s_st); @(negedge clk); squash_valid = 0;
    dispatch(OP_LOAD, LD, 0, dv, ds, s_ld);
    check("squashed store forgotten", !dv);
    // 11. clear period (40 ops): run until a clear, then the set is gone
    n_clear = clear_count;
    while (clear_count == n_clear) dispatch(OP_LOAD, 64'h500000, 0, dv, ds, s_ld);
    check("clear after 40 ops", seq == 40);
    dispatch(OP_STORE, ST, 0, dv, ds, s_st);
    dispatch(OP_LOAD, LD, 0, dv, ds, s_ld);
    check("tables cleared", !dv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
