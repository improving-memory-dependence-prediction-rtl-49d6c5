// mem_issue_queue: instruction-queue slots for memory micro-ops.
//
// Holds dispatched loads and stores until both kinds of dependence are met:
//  - the register dependence: the op's address/data operands are ready
//    (src_ready at dispatch, or a later wakeup broadcast of src_tag);
//  - the predicted memory dependence: if the MDP named a store (dep_seq),
//    the op waits until that store has executed (rel_valid/rel_seq).
// Each cycle the oldest ready entry is issued (iss_valid/iss_uop, taken
// unconditionally by the execute stage) and freed. A squash frees every entry
// not older than squash_seq. A wakeup or release arriving in the cycle an op
// is inserted applies to that op too.
// Insertion reports ins_ready while a slot is free. Issue is combinational
// from the entry registers. Only memory ops are modelled: other instructions
// appear only through the register wakeups they broadcast. One op is
// inserted and one issued per cycle (the paper's pipeline width is the whole
// core's; the number of memory ports is not given).
module mem_issue_queue
  import mdp_pkg::*;
#(
  parameter int unsigned IQ_ENTRIES = SMALL_IQ_ENTRIES
) (
  input  logic     clk,
  input  logic     rst_n,
  // insertion
  input  logic     ins_valid,
  input  mem_uop_t ins_uop,
  input  logic     ins_dep_valid,
  input  seq_t     ins_dep_seq,
  output logic     ins_ready,
  // register wakeup
  input  logic     wk_valid,
  input  tag_t     wk_tag,
  // a store executed: release ops predicted to depend on it
  input  logic     rel_valid,
  input  seq_t     rel_seq,
  // rollback
  input  logic     squash_valid,
  input  seq_t     squash_seq,
  // issue
  output logic     iss_valid,
  output mem_uop_t iss_uop,
  // status: some op has its registers ready but waits for a predicted store
  output logic     mem_dep_wait,
  output logic [$clog2(IQ_ENTRIES+1)-1:0] occupancy
);

  localparam int unsigned IDX_W = $clog2(IQ_ENTRIES);

  typedef struct packed {
    logic     valid;
    mem_uop_t uop;
    logic     dep_valid;
    seq_t     dep_seq;
  } iq_entry_t;

  iq_entry_t q [IQ_ENTRIES];

  logic             free_found;
  logic [IDX_W-1:0] free_idx;
  logic             sel_found;
  logic [IDX_W-1:0] sel_idx;

  function automatic logic entry_ready(iq_entry_t e);
    return e.valid && e.uop.src_ready && !e.dep_valid;
  endfunction

  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    sel_found  = 1'b0;
    sel_idx    = '0;
    mem_dep_wait = 1'b0;
    occupancy  = '0;
    for (int i = 0; i < IQ_ENTRIES; i++) begin
      if (!q[i].valid && !free_found) begin
        free_found = 1'b1;
        free_idx   = IDX_W'(i);
      end
      if (entry_ready(q[i]) &&
          (!sel_found || seq_older(q[i].uop.seq, q[sel_idx].uop.seq))) begin
        sel_found = 1'b1;
        sel_idx   = IDX_W'(i);
      end
      if (q[i].valid && q[i].uop.src_ready && q[i].dep_valid) mem_dep_wait = 1'b1;
      if (q[i].valid) occupancy = occupancy + 1'b1;
    end
  end

  assign ins_ready = free_found;
  assign iss_valid = sel_found;
  assign iss_uop   = q[sel_idx].uop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < IQ_ENTRIES; i++) q[i] <= '0;
    end else begin
      for (int i = 0; i < IQ_ENTRIES; i++) begin
        if (q[i].valid) begin
          if ((sel_found && sel_idx == IDX_W'(i)) ||
              (squash_valid && !seq_older(q[i].uop.seq, squash_seq))) begin
            q[i].valid <= 1'b0;
          end else begin
            if (wk_valid && q[i].uop.src_tag == wk_tag) q[i].uop.src_ready <= 1'b1;
            if (rel_valid && q[i].dep_valid && q[i].dep_seq == rel_seq) q[i].dep_valid <= 1'b0;
          end
        end
      end
      if (ins_valid && free_found && !squash_valid) begin
        q[free_idx].valid <= 1'b1;
        q[free_idx].uop   <= ins_uop;
        if (wk_valid && ins_uop.src_tag == wk_tag) q[free_idx].uop.src_ready <= 1'b1;
        q[free_idx].dep_valid <= ins_dep_valid && !(rel_valid && ins_dep_seq == rel_seq);
        q[free_idx].dep_seq   <= ins_dep_seq;
      end
    end
  end

endmodule
