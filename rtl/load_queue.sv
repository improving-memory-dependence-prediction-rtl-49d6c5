// load_queue: in-flight loads and memory order violation detection.
//
// A load takes a slot at dispatch (alloc_*), keeping its PC and PND label.
// When it executes (ex_*), its address is recorded and it is marked as
// executed. An executing store searches the queue (st_*, combinational) for
// loads that are younger than it, have already executed and read the same
// address: such a load read stale data, a memory order violation. The oldest
// of them is reported (viol_*), since the rollback restarts from it. This
// search is made for every load, labelled or not: PND labels change only
// the prediction, never the detection. At commit the slot is freed; a squash
// frees every load not older than squash_seq. Aligned, equal-size accesses
// are assumed, so equal addresses is the whole alias test.
module load_queue
  import mdp_pkg::*;
#(
  parameter int unsigned LQ_ENTRIES = SMALL_LSQ_ENTRIES
) (
  input  logic  clk,
  input  logic  rst_n,
  // allocation at dispatch
  input  logic  alloc_valid,
  input  seq_t  alloc_seq,
  input  pc_t   alloc_pc,
  input  logic  alloc_pnd,
  output logic  alloc_ready,
  // load execution
  input  logic  ex_valid,
  input  seq_t  ex_seq,
  input  addr_t ex_addr,
  // store search
  input  logic  st_valid,
  input  seq_t  st_seq,
  input  addr_t st_addr,
  output logic  viol_valid,
  output seq_t  viol_seq,
  output pc_t   viol_pc,
  output logic  viol_pnd,
  // commit
  input  logic  cm_valid,
  input  seq_t  cm_seq,
  // rollback
  input  logic  squash_valid,
  input  seq_t  squash_seq
);

  localparam int unsigned IDX_W = $clog2(LQ_ENTRIES);

  typedef struct packed {
    logic  valid;
    logic  executed;
    logic  pnd;
    seq_t  seq;
    pc_t   pc;
    addr_t addr;
  } lq_entry_t;

  lq_entry_t q [LQ_ENTRIES];

  logic             free_found, v_found;
  logic [IDX_W-1:0] free_idx, v_idx;

  always_comb begin
    free_found = 1'b0; free_idx = '0;
    v_found    = 1'b0; v_idx    = '0;
    for (int i = 0; i < LQ_ENTRIES; i++) begin
      if (!q[i].valid && !free_found) begin
        free_found = 1'b1; free_idx = IDX_W'(i);
      end
      if (st_valid && q[i].valid && q[i].executed && q[i].addr == st_addr &&
          seq_older(st_seq, q[i].seq) &&
          (!v_found || seq_older(q[i].seq, q[v_idx].seq))) begin
        v_found = 1'b1; v_idx = IDX_W'(i);
      end
    end
  end

  assign alloc_ready = free_found;
  assign viol_valid  = v_found;
  assign viol_seq    = q[v_idx].seq;
  assign viol_pc     = q[v_idx].pc;
  assign viol_pnd    = q[v_idx].pnd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LQ_ENTRIES; i++) q[i] <= '0;
    end else begin
      for (int i = 0; i < LQ_ENTRIES; i++) begin
        if (q[i].valid) begin
          if ((cm_valid && q[i].seq == cm_seq) ||
              (squash_valid && !seq_older(q[i].seq, squash_seq))) begin
            q[i].valid <= 1'b0;
          end else if (ex_valid && q[i].seq == ex_seq) begin
            q[i].executed <= 1'b1;
            q[i].addr     <= ex_addr;
          end
        end
      end
      if (alloc_valid && free_found && !squash_valid) begin
        q[free_idx].valid    <= 1'b1;
        q[free_idx].executed <= 1'b0;
        q[free_idx].pnd      <= alloc_pnd;
        q[free_idx].seq      <= alloc_seq;
        q[free_idx].pc       <= alloc_pc;
        q[free_idx].addr     <= '0;
      end
    end
  end

endmodule
