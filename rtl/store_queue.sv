// store_queue: in-flight stores, store-to-load forwarding and commit.
//
// A store takes a slot at dispatch (alloc_*), with its address still
// unknown. When it executes, its address and data are written (ex_*). An
// executing load searches the queue (ld_*, combinational): the youngest
// store older than the load whose address is known and equal to the load's
// gives its data (fwd_hit/fwd_data); otherwise the load reads memory. Stores
// whose address is still unknown are speculatively assumed not to alias; the
// load queue catches the case where they do. At commit (cm_*) the store's
// address and data are presented on the memory write port in the same cycle
// and its slot is freed. A squash frees every store not older than
// squash_seq. Slots are found by sequence number rather than by position, so
// the queue needs no head/tail pointers. Accesses are assumed to be aligned
// and of one size, so equal addresses is the whole alias test.
module store_queue
  import mdp_pkg::*;
#(
  parameter int unsigned SQ_ENTRIES = SMALL_LSQ_ENTRIES
) (
  input  logic  clk,
  input  logic  rst_n,
  // allocation at dispatch
  input  logic  alloc_valid,
  input  seq_t  alloc_seq,
  input  pc_t   alloc_pc,
  output logic  alloc_ready,
  // store execution
  input  logic  ex_valid,
  input  seq_t  ex_seq,
  input  addr_t ex_addr,
  input  data_t ex_data,
  output pc_t   ex_pc,
  // load search
  input  seq_t  ld_seq,
  input  addr_t ld_addr,
  output logic  fwd_hit,
  output data_t fwd_data,
  // commit
  input  logic  cm_valid,
  input  seq_t  cm_seq,
  output logic  mem_wr_valid,
  output addr_t mem_wr_addr,
  output data_t mem_wr_data,
  // rollback
  input  logic  squash_valid,
  input  seq_t  squash_seq
);

  localparam int unsigned IDX_W = $clog2(SQ_ENTRIES);

  typedef struct packed {
    logic  valid;
    logic  addr_valid;
    seq_t  seq;
    pc_t   pc;
    addr_t addr;
    data_t data;
  } sq_entry_t;

  sq_entry_t q [SQ_ENTRIES];

  logic             free_found, fwd_found, cm_found, ex_found;
  logic [IDX_W-1:0] free_idx, fwd_idx, cm_idx, ex_idx;

  always_comb begin
    free_found = 1'b0; free_idx = '0;
    fwd_found  = 1'b0; fwd_idx  = '0;
    cm_found   = 1'b0; cm_idx   = '0;
    ex_found   = 1'b0; ex_idx   = '0;
    for (int i = 0; i < SQ_ENTRIES; i++) begin
      if (!q[i].valid && !free_found) begin
        free_found = 1'b1; free_idx = IDX_W'(i);
      end
      if (q[i].valid && q[i].addr_valid && q[i].addr == ld_addr &&
          seq_older(q[i].seq, ld_seq) &&
          (!fwd_found || seq_older(q[fwd_idx].seq, q[i].seq))) begin
        fwd_found = 1'b1; fwd_idx = IDX_W'(i);
      end
      if (q[i].valid && q[i].seq == cm_seq) begin
        cm_found = 1'b1; cm_idx = IDX_W'(i);
      end
      if (q[i].valid && q[i].seq == ex_seq) begin
        ex_found = 1'b1; ex_idx = IDX_W'(i);
      end
    end
  end

  assign alloc_ready  = free_found;
  assign fwd_hit      = fwd_found;
  assign fwd_data     = q[fwd_idx].data;
  assign ex_pc        = q[ex_idx].pc;
  assign mem_wr_valid = cm_valid && cm_found;
  assign mem_wr_addr  = q[cm_idx].addr;
  assign mem_wr_data  = q[cm_idx].data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SQ_ENTRIES; i++) q[i] <= '0;
    end else begin
      for (int i = 0; i < SQ_ENTRIES; i++) begin
        if (q[i].valid && squash_valid && !seq_older(q[i].seq, squash_seq))
          q[i].valid <= 1'b0;
      end
      if (ex_valid && ex_found) begin
        q[ex_idx].addr_valid <= 1'b1;
        q[ex_idx].addr       <= ex_addr;
        q[ex_idx].data       <= ex_data;
      end
      if (cm_valid && cm_found) q[cm_idx].valid <= 1'b0;
      if (alloc_valid && free_found && !squash_valid) begin
        q[free_idx].valid      <= 1'b1;
        q[free_idx].addr_valid <= 1'b0;
        q[free_idx].seq        <= alloc_seq;
        q[free_idx].pc         <= alloc_pc;
      end
    end
  end

endmodule
