// tb_pnd_mem_dep_unit: end-to-end test of the memory-dependence unit at its
// default (small-configuration) sizes.
//
// The testbench plays the rest of the core: it dispatches a program in
// order, wakes each op's registers after a per-op delay, keeps a reorder
// buffer, commits in order, re-dispatches from the violating load after a
// rollback, and provides a data memory. The program is a loop whose body
// mimics the paper's examples:
//   S_A  store a[i]        (slow address: long register delay)
//   L_A  load  a[i]        true dependence on S_A -> violations until the
//                          predictor learns the pair, then predicted waits
//   L_B  load  b[i]        PND-labelled, read-only array: skips the MDP
//   L_P  load  a[i-1]      PND-labelled but really aliasing the previous
//                          iteration's S_A (the paper's corner case):
//                          violations are caught, never trained
//   L_C  load  c[i]        unlabelled, read-only, PC aliases L_A in the SSIT
//                          -> false dependences
//   S_D  store d[i]
// plus random loads/stores over a small address range. Labels are enabled
// for the first half of the iterations and disabled for the second.
// Every committed load value is compared with a sequential execution of the
// program, every committed store with the program, and the final memory
// with the sequential result. Each mechanism (trained violation, labelled
// violation, predicted wait, lookup skip, forwarding, periodic clear,
// dispatch stall, label-disable mode) must occur at least once.
module tb_pnd_mem_dep_unit;
  import mdp_pkg::*;

  localparam int ITERS  = 2000;
  localparam int BODY   = 8;
  localparam int NPROG  = ITERS * BODY;
  localparam int NWORDS = 64;
  localparam int MAX_CYCLES = 400000;

  logic clk = 0, rst_n = 0, pnd_enable = 1;
  logic disp_valid = 0, disp_ready;
  mem_uop_t disp_uop = '0;
  logic wk_valid = 0;
  tag_t wk_tag = '0;
  logic mem_rd_valid;
  addr_t mem_rd_addr;
  data_t mem_rd_data;
  logic ld_done_valid, ld_done_fwd, st_done_valid;
  seq_t ld_done_seq, st_done_seq;
  data_t ld_done_data;
  logic squash_valid;
  seq_t squash_seq;
  pc_t squash_pc;
  logic cm_valid = 0;
  mem_op_e cm_op = OP_LOAD;
  seq_t cm_seq = '0;
  logic mem_wr_valid;
  addr_t mem_wr_addr;
  data_t mem_wr_data;
  logic [31:0] lookup_count, pnd_skip_count, train_count, pnd_viol_count, clear_count;
  logic mem_dep_wait;

  pnd_mem_dep_unit dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ program
  mem_op_e p_op   [NPROG];
  bit      p_pnd  [NPROG];
  pc_t     p_pc   [NPROG];
  addr_t   p_addr [NPROG];
  data_t   p_data [NPROG];
  int      p_dly  [NPROG];
  data_t   p_exp  [NPROG];   // expected load value

  data_t mem     [NWORDS];
  data_t ref_mem [NWORDS];

  localparam addr_t A_BASE = 0, B_BASE = 128, C_BASE = 256, D_BASE = 384;

  always_comb mem_rd_data = mem[mem_rd_addr[8:3]];

  function automatic data_t init_word(int w);
    return data_t'(w) * 64'h9E3779B97F4A7C15 + 64'd1;
  endfunction

  task automatic put(int k, mem_op_e op, bit pnd, pc_t pc, addr_t a, data_t d, int dly);
    p_op[k] = op; p_pnd[k] = pnd; p_pc[k] = pc; p_addr[k] = a; p_data[k] = d; p_dly[k] = dly;
  endtask

  task automatic build_program();
    for (int i = 0; i < ITERS; i++) begin
      int k = i * BODY;
      put(k + 0, OP_STORE, 0, 64'h1000, A_BASE + addr_t'((i % 16) * 8), data_t'(i * 7 + 3),
          (i % 50 == 49) ? 150 : $urandom_range(4, 24));
      put(k + 1, OP_LOAD,  0, 64'h1004, A_BASE + addr_t'((i % 16) * 8), '0, $urandom_range(0, 2));
      put(k + 2, OP_LOAD,  1, 64'h1008, B_BASE + addr_t'((i % 16) * 8), '0, $urandom_range(0, 2));
      put(k + 3, OP_LOAD,  1, 64'h100C, A_BASE + addr_t'(((i + 15) % 16) * 8), '0, $urandom_range(0, 2));
      put(k + 4, OP_LOAD,  0, 64'h1084, C_BASE + addr_t'((i % 16) * 8), '0, $urandom_range(0, 2));
      put(k + 5, OP_STORE, 0, 64'h1010, D_BASE + addr_t'((i % 16) * 8), data_t'(i), $urandom_range(0, 3));
      // two random ops over the d[] array
      for (int j = 6; j < BODY; j++) begin
        if ($urandom_range(0, 1) == 0)
          put(k + j, OP_STORE, 0, 64'h2000 + pc_t'(j * 4), D_BASE + addr_t'($urandom_range(0, 15) * 8),
              data_t'($urandom), $urandom_range(0, 12));
        else
          put(k + j, OP_LOAD, bit'($urandom_range(0, 1)), 64'h2000 + pc_t'(j * 4),
              D_BASE + addr_t'($urandom_range(0, 15) * 8), '0, $urandom_range(0, 6));
      end
    end
    // sequential reference
    for (int w = 0; w < NWORDS; w++) begin
      ref_mem[w] = init_word(w);
      mem[w]     = init_word(w);
    end
    for (int k = 0; k < NPROG; k++) begin
      int w = int'(p_addr[k][8:3]);
      if (p_op[k] == OP_STORE) ref_mem[w] = p_data[k];
      else p_exp[k] = ref_mem[w];
      if (p_op[k] == OP_LOAD) p_data[k] = '0;
    end
  endtask

  // ------------------------------------------------------------ core model
  typedef struct {
    seq_t seq;
    int   idx;
  } rob_t;
  rob_t rob[$];

  bit    done  [65536];
  bit    woken [65536];
  int    wtime [65536];
  data_t lval  [65536];

  int checks = 0, failures = 0;

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  int cycle = 0;
  int n_disp = 0, n_commit = 0, n_viol = 0, n_viol_pnd = 0, n_fwd = 0, n_stall = 0;
  int n_wait = 0, n_disp_off = 0, skip_at_switch = 0, lookups_off = 0;

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: committed %0d of %0d", n_commit, NPROG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   next_idx = 0;
    seq_t next_seq = 16'd1;
    int   wk_i;
    build_program();
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (n_commit < NPROG) begin
      @(negedge clk);
      cycle++;
      // mode switch half way through the program
      if (pnd_enable && next_idx >= NPROG / 2) begin
        pnd_enable = 0;
        skip_at_switch = int'(pnd_skip_count);
      end
      // dispatch
      disp_valid = next_idx < NPROG;
      if (disp_valid) begin
        disp_uop = '0;
        disp_uop.op        = p_op[next_idx];
        disp_uop.pnd       = p_pnd[next_idx];
        disp_uop.pc        = p_pc[next_idx];
        disp_uop.seq       = next_seq;
        disp_uop.src_ready = (p_dly[next_idx] == 0);
        disp_uop.src_tag   = tag_t'(next_seq);
        disp_uop.addr      = p_addr[next_idx];
        disp_uop.data      = p_data[next_idx];
      end
      // register wakeup: oldest due op not yet woken
      wk_valid = 0;
      wk_i = -1;
      foreach (rob[i])
        if (wk_i < 0 && !woken[rob[i].seq] && wtime[rob[i].seq] <= cycle) wk_i = i;
      if (wk_i >= 0) begin
        wk_valid = 1;
        wk_tag = tag_t'(rob[wk_i].seq);
      end
      // commit
      cm_valid = rob.size() > 0 && done[rob[0].seq];
      if (cm_valid) begin
        cm_seq = rob[0].seq;
        cm_op  = p_op[rob[0].idx];
      end
      #1;
      // ---- observe this cycle's results
      if (ld_done_valid) begin
        done[ld_done_seq] = 1;
        lval[ld_done_seq] = ld_done_data;
        if (ld_done_fwd) n_fwd++;
      end
      if (st_done_valid) done[st_done_seq] = 1;
      if (mem_dep_wait) n_wait++;
      if (wk_valid) woken[rob[wk_i].seq] = 1;
      if (cm_valid) begin
        int k;
        k = rob[0].idx;
        if (p_op[k] == OP_LOAD) begin
          check("committed load value", lval[rob[0].seq] == p_exp[k]);
        end else begin
          check("store write", mem_wr_valid && mem_wr_addr == p_addr[k] && mem_wr_data == p_data[k]);
          mem[p_addr[k][8:3]] = p_data[k];
        end
        void'(rob.pop_front());
        n_commit++;
      end else begin
        check("no spurious write", !mem_wr_valid);
      end
      if (squash_valid) begin
        int li;
        li = -1;
        foreach (rob[i]) if (rob[i].seq == squash_seq) li = rob[i].idx;
        check("squash names an in-flight load", li >= 0 && p_op[li] == OP_LOAD && squash_pc == p_pc[li]);
        n_viol++;
        if (li >= 0 && p_pnd[li] && pnd_enable) n_viol_pnd++;
        while (rob.size() > 0 && !seq_older(rob[$].seq, squash_seq)) void'(rob.pop_back());
        if (li >= 0) next_idx = li;
        check("no dispatch during squash", !disp_ready);
      end else if (disp_valid && disp_ready) begin
        rob_t e;
        e.seq = next_seq; e.idx = next_idx;
        rob.push_back(e);
        done[next_seq]  = 0;
        woken[next_seq] = (p_dly[next_idx] == 0);
        wtime[next_seq] = cycle + p_dly[next_idx];
        n_disp++;
        if (!pnd_enable) n_disp_off++;
        next_seq++;
        next_idx++;
      end else if (disp_valid) begin
        n_stall++;
      end
    end
    @(negedge clk);
    for (int w = 0; w < NWORDS; w++) check("final memory", mem[w] == ref_mem[w]);
    check("every dispatch looked up or skipped", lookup_count + pnd_skip_count == 32'(n_disp));
    $display("ops=%0d dispatches=%0d cycles=%0d", NPROG, n_disp, cycle);
    $display("violations=%0d (labelled, untrained %0d) trained=%0d pnd_viol_count=%0d",
             n_viol, n_viol_pnd, train_count, pnd_viol_count);
    $display("lookups=%0d pnd_skips=%0d forwards=%0d predicted_wait_cycles=%0d stalls=%0d clears=%0d",
             lookup_count, pnd_skip_count, n_fwd, n_wait, n_stall, clear_count);
    check("mechanism: trained violation", train_count > 0);
    check("mechanism: labelled violation not trained", pnd_viol_count > 0 && n_viol_pnd == int'(pnd_viol_count));
    check("mechanism: predicted dependence wait", n_wait > 0);
    check("mechanism: PND lookup skip", pnd_skip_count > 0);
    check("mechanism: store-to-load forwarding", n_fwd > 0);
    check("mechanism: periodic clear", clear_count > 0);
    check("mechanism: dispatch stall", n_stall > 0);
    check("mechanism: labels disabled, no skips", n_disp_off > 0 && int'(pnd_skip_count) == skip_at_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
