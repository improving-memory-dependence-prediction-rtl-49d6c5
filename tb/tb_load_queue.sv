// tb_load_queue: random test of the load queue (default 32 entries) against
// a reference list. Each cycle one of: allocate a load (random PND label),
// execute a pending load (address from a small set), commit the oldest
// load, or squash; and every cycle a store with a random sequence number
// and address searches the queue. The expected violation is the oldest
// executed load younger than the store with the same address.
module tb_load_queue;
  import mdp_pkg::*;

  localparam int unsigned N = 32;

  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_pnd = 0, alloc_ready;
  seq_t alloc_seq = '0;
  pc_t  alloc_pc = '0;
  logic ex_valid = 0;
  seq_t ex_seq = '0;
  addr_t ex_addr = '0;
  logic st_valid = 0;
  seq_t st_seq = '0;
  addr_t st_addr = '0;
  logic viol_valid, viol_pnd;
  seq_t viol_seq;
  pc_t viol_pc;
  logic cm_valid = 0;
  seq_t cm_seq = '0;
  logic squash_valid = 0;
  seq_t squash_seq = '0;

  int checks = 0, failures = 0;

  load_queue dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int    seq;
    bit    pnd;
    bit    ex;
    addr_t addr;
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
    int seq = 100, best, viols = 0, pviols = 0, fulls = 0, action, k;
    bit can_alloc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      @(negedge clk);
      alloc_valid = 0; ex_valid = 0; cm_valid = 0; squash_valid = 0;
      action = $urandom_range(0, 99);
      if (action < 40) begin
        alloc_valid = 1; seq += 2; alloc_seq = seq_t'(seq); alloc_pc = pc_t'(seq * 4);
        alloc_pnd = ($urandom_range(0, 2) == 0);
      end else if (action < 75 && model.size() > 0) begin
        k = $urandom_range(0, model.size() - 1);
        ex_valid = 1; ex_seq = seq_t'(model[k].seq); ex_addr = addr_t'($urandom_range(0, 7) * 8);
      end else if (action < 98 && model.size() > 0) begin
        cm_valid = 1; cm_seq = seq_t'(model[0].seq);
      end else if (action >= 98 && model.size() > 0) begin
        squash_valid = 1; squash_seq = seq_t'(model[$urandom_range(0, model.size() - 1)].seq);
      end
      st_valid = ($urandom_range(0, 1) == 0);
      st_seq   = seq_t'(seq - $urandom_range(0, 60) + 1);
      st_addr  = addr_t'($urandom_range(0, 7) * 8);
      #1;
      best = -1;
      if (st_valid)
        foreach (model[i])
          if (model[i].ex && model[i].addr == st_addr && model[i].seq > int'(st_seq) &&
              (best < 0 || model[i].seq < model[best].seq)) best = i;
      check("alloc_ready", alloc_ready == (model.size() < N));
      check("viol_valid", viol_valid == (best >= 0));
      if (best >= 0) begin
        check("viol_seq", int'(viol_seq) == model[best].seq);
        check("viol_pc", viol_pc == pc_t'(model[best].seq * 4));
        check("viol_pnd", viol_pnd == model[best].pnd);
        viols++;
        if (model[best].pnd) pviols++;
      end
      if (!alloc_ready) fulls++;
      can_alloc = model.size() < N;
      for (int i = model.size() - 1; i >= 0; i--)
        if ((cm_valid && model[i].seq == int'(cm_seq)) ||
            (squash_valid && model[i].seq >= int'(squash_seq))) model.delete(i);
        else if (ex_valid && model[i].seq == int'(ex_seq)) begin
          model[i].ex = 1; model[i].addr = ex_addr;
        end
      if (alloc_valid && can_alloc && !squash_valid) begin
        m_t e;
        e.seq = seq; e.pnd = alloc_pnd; e.ex = 0; e.addr = '0;
        model.push_back(e);
      end
    end
    check("violations seen", viols > 100);
    check("labelled violations seen", pviols > 10);
    $display("violations=%0d labelled=%0d full_cycles=%0d", viols, pviols, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
