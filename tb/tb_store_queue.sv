// tb_store_queue: random test of the store queue (default 32 entries)
// against a reference list. Each cycle one of: allocate a store, execute a
// pending store (address from a small set so that matches are common),
// commit the oldest executed store, or squash; and every cycle a load with
// a random sequence number searches for forwarding. The expected forward is
// the youngest older store with a known, equal address.
module tb_store_queue;
  import mdp_pkg::*;

  localparam int unsigned N = 32;

  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready;
  seq_t alloc_seq = '0;
  pc_t  alloc_pc = '0;
  logic ex_valid = 0;
  seq_t ex_seq = '0;
  addr_t ex_addr = '0;
  data_t ex_data = '0;
  pc_t ex_pc;
  seq_t ld_seq = '0;
  addr_t ld_addr = '0;
  logic fwd_hit;
  data_t fwd_data;
  logic cm_valid = 0;
  seq_t cm_seq = '0;
  logic mem_wr_valid;
  addr_t mem_wr_addr;
  data_t mem_wr_data;
  logic squash_valid = 0;
  seq_t squash_seq = '0;

  int checks = 0, failures = 0;

  store_queue dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int    seq;
    bit    av;
    addr_t addr;
    data_t data;
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
    int seq = 100, best, fwds = 0, commits = 0, fulls = 0, action, k;
    bit can_alloc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      @(negedge clk);
      alloc_valid = 0; ex_valid = 0; cm_valid = 0; squash_valid = 0;
      action = $urandom_range(0, 99);
      if (action < 40) begin
        alloc_valid = 1; seq += 2; alloc_seq = seq_t'(seq); alloc_pc = pc_t'(seq * 4);
      end else if (action < 75 && model.size() > 0) begin
        k = $urandom_range(0, model.size() - 1);
        ex_valid = 1; ex_seq = seq_t'(model[k].seq);
        ex_addr = addr_t'($urandom_range(0, 7) * 8); ex_data = {$urandom, $urandom};
      end else if (action < 98 && model.size() > 0 && model[0].av) begin
        cm_valid = 1; cm_seq = seq_t'(model[0].seq);
      end else if (action >= 98 && model.size() > 0) begin
        squash_valid = 1; squash_seq = seq_t'(model[$urandom_range(0, model.size() - 1)].seq);
      end
      ld_seq  = seq_t'(seq - $urandom_range(0, 40) + 1);
      ld_addr = addr_t'($urandom_range(0, 7) * 8);
      #1;
      best = -1;
      foreach (model[i])
        if (model[i].av && model[i].addr == ld_addr && model[i].seq < int'(ld_seq) &&
            (best < 0 || model[i].seq > model[best].seq)) best = i;
      check("alloc_ready", alloc_ready == (model.size() < N));
      check("fwd_hit", fwd_hit == (best >= 0));
      if (best >= 0) begin
        check("fwd_data", fwd_data == model[best].data);
        fwds++;
      end
      if (ex_valid) check("ex_pc", ex_pc == pc_t'(int'(ex_seq) * 4));
      check("mem_wr_valid", mem_wr_valid == cm_valid);
      if (cm_valid) begin
        check("mem_wr addr/data", mem_wr_addr == model[0].addr && mem_wr_data == model[0].data);
        commits++;
      end
      if (!alloc_ready) fulls++;
      // model update
      can_alloc = model.size() < N;
      if (squash_valid)
        for (int i = model.size() - 1; i >= 0; i--) if (model[i].seq >= int'(squash_seq)) model.delete(i);
      if (ex_valid) foreach (model[i]) if (model[i].seq == int'(ex_seq)) begin
        model[i].av = 1; model[i].addr = ex_addr; model[i].data = ex_data;
      end
      if (cm_valid) model.delete(0);
      if (alloc_valid && can_alloc) begin
        m_t e;
        e.seq = seq; e.av = 0; e.addr = '0; e.data = '0;
        model.push_back(e);
      end
    end
    check("forwarded", fwds > 100);
    check("committed", commits > 100);
    check("filled", fulls > 0);
    $display("forwards=%0d commits=%0d full_cycles=%0d", fwds, commits, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
