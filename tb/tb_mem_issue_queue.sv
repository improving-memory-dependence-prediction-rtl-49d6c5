// tb_mem_issue_queue: random test of the memory-op issue queue against a
// reference list kept in the testbench (16 entries so that the queue fills).
// Each cycle an op may be inserted (registers ready or not, with or without
// a predicted store), a register tag may be woken, a store may be reported
// executed and, rarely, a squash may occur. The expected issue is the oldest
// entry whose registers are ready and whose predicted store has executed.
module tb_mem_issue_queue;
  import mdp_pkg::*;

  localparam int unsigned N = 16;

  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, ins_dep_valid = 0, ins_ready;
  mem_uop_t ins_uop = '0;
  seq_t ins_dep_seq = '0;
  logic wk_valid = 0;
  tag_t wk_tag = '0;
  logic rel_valid = 0;
  seq_t rel_seq = '0;
  logic squash_valid = 0;
  seq_t squash_seq = '0;
  logic iss_valid;
  mem_uop_t iss_uop;
  logic mem_dep_wait;
  logic [4:0] occupancy;

  int checks = 0, failures = 0;

  mem_issue_queue #(.IQ_ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int  seq;
    bit  rdy;
    int  tag;
    bit  dv;
    int  ds;
  } m_t;
  m_t model[$];

  task automatic check(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq = 0, exp_i; bit can_ins; int issued = 0, dep_waits = 0, fulls = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      ins_valid = 0; wk_valid = 0; rel_valid = 0; squash_valid = 0;
      if ($urandom_range(0, 3) != 0) begin
        ins_valid = 1;
        seq++;
        ins_uop = '0;
        ins_uop.op = mem_op_e'($urandom_range(0, 1));
        ins_uop.seq = seq_t'(seq);
        ins_uop.pc = pc_t'(seq * 4);
        ins_uop.src_ready = ($urandom_range(0, 2) == 0);
        ins_uop.src_tag = tag_t'($urandom_range(0, 7));
        ins_dep_valid = ($urandom_range(0, 2) == 0);
        ins_dep_seq = seq_t'(seq - $urandom_range(1, 12));
      end
      if ($urandom_range(0, 1) == 0) begin wk_valid = 1; wk_tag = tag_t'($urandom_range(0, 7)); end
      if ($urandom_range(0, 1) == 0) begin
        // a predicted store executes: pick one that some entry waits for
        rel_valid = 1; rel_seq = seq_t'(seq - $urandom_range(0, 12));
        if (model.size() > 0) begin
          int k;
          k = $urandom_range(0, model.size() - 1);
          if (model[k].dv) rel_seq = seq_t'(model[k].ds);
        end
      end
      if ($urandom_range(0, 99) == 0) begin squash_valid = 1; squash_seq = seq_t'(seq - $urandom_range(0, 10)); end
      #1;
      // expected selection
      exp_i = -1;
      foreach (model[i])
        if (model[i].rdy && !model[i].dv && (exp_i < 0 || model[i].seq < model[exp_i].seq)) exp_i = i;
      check("ins_ready", ins_ready == (model.size() < N));
      check("occupancy", int'(occupancy) == model.size());
      check("iss_valid", iss_valid == (exp_i >= 0));
      if (exp_i >= 0) check("iss seq", int'(iss_uop.seq) == model[exp_i].seq);
      if (mem_dep_wait) dep_waits++;
      if (!ins_ready) fulls++;
      // update model as the edge does
      can_ins = model.size() < N;
      if (exp_i >= 0) begin model.delete(exp_i); issued++; end
      if (squash_valid)
        for (int i = model.size() - 1; i >= 0; i--) if (model[i].seq >= int'(squash_seq)) model.delete(i);
      foreach (model[i]) begin
        if (wk_valid && model[i].tag == int'(wk_tag)) model[i].rdy = 1;
        if (rel_valid && model[i].dv && model[i].ds == int'(rel_seq)) model[i].dv = 0;
      end
      if (ins_valid && can_ins && !squash_valid) begin
        m_t e;
        e.seq = seq; e.tag = int'(ins_uop.src_tag);
        e.rdy = ins_uop.src_ready || (wk_valid && wk_tag == ins_uop.src_tag);
        e.dv  = ins_dep_valid && !(rel_valid && rel_seq == ins_dep_seq);
        e.ds  = int'(ins_dep_seq);
        model.push_back(e);
      end
    end
    check("issued some", issued > 1000);
    check("saw dependence waits", dep_waits > 0);
    check("saw full queue", fulls > 0);
    $display("issued=%0d dep_wait_cycles=%0d full_cycles=%0d", issued, dep_waits, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
