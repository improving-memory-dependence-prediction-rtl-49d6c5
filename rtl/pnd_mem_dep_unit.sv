// pnd_mem_dep_unit: memory-dependence and disambiguation unit of an
// out-of-order core, with a Store Sets predictor and PND load labels.
//
// How a memory op flows through the unit:
//  1. Dispatch (one op per cycle). The op is inserted into the issue queue
//     and into the load or store queue. Unless it is a PND-labelled load
//     (and pnd_enable is set), the MDP is looked up by PC; a predicted store
//     dependence makes the op wait in the issue queue for that store.
//     disp_ready is low while the needed slots are full or a rollback is
//     being signalled.
//  2. Issue. The oldest op whose registers are ready and whose predicted
//     store (if any) has executed leaves the issue queue and is registered
//     into the single execute stage.
//  3. Execute (one cycle later). A load searches the store queue and takes
//     forwarded data, or reads memory through mem_rd_* (combinational read,
//     data expected in the same cycle); it reports ld_done_*. A store writes
//     its address and data into the store queue, releases ops waiting on it
//     (issue queue and LFST) and searches the load queue; a younger executed
//     load to the same address is a memory order violation.
//  4. Violation. The unit raises squash_valid/squash_seq/squash_pc for one
//     cycle: every op not older than the violating load is dropped from all
//     queues, and the core must re-dispatch from that load. The MDP is
//     trained with the (store PC, load PC) pair unless the load is labelled.
//  5. Commit. The core commits ops in program order (cm_*); a committing
//     store is written to memory on mem_wr_* in the same cycle.
// The core around the unit (front end, register wakeup, reorder buffer,
// caches) is outside it and reached through these ports. Default sizes are
// the paper's small configuration; the single dispatch/issue/execute slot
// and the combinational memory read are this design's simplifications.
module pnd_mem_dep_unit
  import mdp_pkg::*;
#(
  parameter int unsigned SSIT_ENTRIES = SMALL_SSIT_ENTRIES,
  parameter int unsigned LFST_ENTRIES = SMALL_SSIT_ENTRIES,
  parameter int unsigned CLEAR_PERIOD = SMALL_CLEAR_PERIOD,
  parameter int unsigned IQ_ENTRIES   = SMALL_IQ_ENTRIES,
  parameter int unsigned LQ_ENTRIES   = SMALL_LSQ_ENTRIES,
  parameter int unsigned SQ_ENTRIES   = SMALL_LSQ_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pnd_enable,
  // dispatch
  input  logic        disp_valid,
  input  mem_uop_t    disp_uop,
  output logic        disp_ready,
  // register wakeup
  input  logic        wk_valid,
  input  tag_t        wk_tag,
  // memory read port
  output logic        mem_rd_valid,
  output addr_t       mem_rd_addr,
  input  data_t       mem_rd_data,
  // completion
  output logic        ld_done_valid,
  output seq_t        ld_done_seq,
  output data_t       ld_done_data,
  output logic        ld_done_fwd,
  output logic        st_done_valid,
  output seq_t        st_done_seq,
  // rollback request
  output logic        squash_valid,
  output seq_t        squash_seq,
  output pc_t         squash_pc,
  // commit
  input  logic        cm_valid,
  input  mem_op_e     cm_op,
  input  seq_t        cm_seq,
  output logic        mem_wr_valid,
  output addr_t       mem_wr_addr,
  output data_t       mem_wr_data,
  // statistics
  output logic [31:0] lookup_count,
  output logic [31:0] pnd_skip_count,
  output logic [31:0] train_count,
  output logic [31:0] pnd_viol_count,
  output logic [31:0] clear_count,
  output logic        mem_dep_wait
);

  // ---------------------------------------------------------------- dispatch
  logic     iq_ready, lq_ready, sq_ready;
  logic     disp_fire;
  logic     dep_valid;
  seq_t     dep_seq;

  assign disp_ready = iq_ready && !squash_valid &&
                      (disp_uop.op == OP_LOAD ? lq_ready : sq_ready);
  assign disp_fire  = disp_valid && disp_ready;

  // ---------------------------------------------------------------- execute
  logic     iss_valid;
  mem_uop_t iss_uop;
  logic     ex_valid_q;
  mem_uop_t ex_q;
  logic     ex_load, ex_store;
  logic     fwd_hit;
  data_t    fwd_data;
  pc_t      st_pc;
  logic     viol_valid, viol_pnd;
  seq_t     viol_seq;
  pc_t      viol_pc;

  assign ex_load  = ex_valid_q && ex_q.op == OP_LOAD;
  assign ex_store = ex_valid_q && ex_q.op == OP_STORE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_valid_q <= 1'b0;
      ex_q       <= '0;
    end else begin
      ex_valid_q <= iss_valid && !(squash_valid && !seq_older(iss_uop.seq, squash_seq));
      ex_q       <= iss_uop;
    end
  end

  assign mem_rd_valid  = ex_load && !fwd_hit;
  assign mem_rd_addr   = ex_q.addr;
  assign ld_done_valid = ex_load;
  assign ld_done_seq   = ex_q.seq;
  assign ld_done_data  = fwd_hit ? fwd_data : mem_rd_data;
  assign ld_done_fwd   = fwd_hit;
  assign st_done_valid = ex_store;
  assign st_done_seq   = ex_q.seq;

  assign squash_valid  = ex_store && viol_valid;
  assign squash_seq    = viol_seq;
  assign squash_pc     = viol_pc;

  // ---------------------------------------------------------------- blocks
  store_sets_mdp #(
    .SSIT_ENTRIES (SSIT_ENTRIES),
    .LFST_ENTRIES (LFST_ENTRIES),
    .CLEAR_PERIOD (CLEAR_PERIOD)
  ) u_mdp (
    .clk, .rst_n, .pnd_enable,
    .disp_valid    (disp_fire),
    .disp_op       (disp_uop.op),
    .disp_pnd      (disp_uop.pnd),
    .disp_pc       (disp_uop.pc),
    .disp_seq      (disp_uop.seq),
    .dep_valid,
    .dep_seq,
    .st_exec_valid (ex_store),
    .st_exec_seq   (ex_q.seq),
    .viol_valid    (squash_valid),
    .viol_load_pc  (viol_pc),
    .viol_load_pnd (viol_pnd),
    .viol_store_pc (st_pc),
    .squash_valid,
    .squash_seq,
    .clear         (),
    .lookup_count,
    .pnd_skip_count,
    .train_count,
    .pnd_viol_count,
    .clear_count
  );

  mem_issue_queue #(.IQ_ENTRIES(IQ_ENTRIES)) u_iq (
    .clk, .rst_n,
    .ins_valid     (disp_fire),
    .ins_uop       (disp_uop),
    .ins_dep_valid (dep_valid),
    .ins_dep_seq   (dep_seq),
    .ins_ready     (iq_ready),
    .wk_valid,
    .wk_tag,
    .rel_valid     (ex_store),
    .rel_seq       (ex_q.seq),
    .squash_valid,
    .squash_seq,
    .iss_valid,
    .iss_uop,
    .mem_dep_wait,
    .occupancy     ()
  );

  load_queue #(.LQ_ENTRIES(LQ_ENTRIES)) u_lq (
    .clk, .rst_n,
    .alloc_valid  (disp_fire && disp_uop.op == OP_LOAD),
    .alloc_seq    (disp_uop.seq),
    .alloc_pc     (disp_uop.pc),
    .alloc_pnd    (disp_uop.pnd),
    .alloc_ready  (lq_ready),
    .ex_valid     (ex_load),
    .ex_seq       (ex_q.seq),
    .ex_addr      (ex_q.addr),
    .st_valid     (ex_store),
    .st_seq       (ex_q.seq),
    .st_addr      (ex_q.addr),
    .viol_valid,
    .viol_seq,
    .viol_pc,
    .viol_pnd,
    .cm_valid     (cm_valid && cm_op == OP_LOAD),
    .cm_seq,
    .squash_valid,
    .squash_seq
  );

  store_queue #(.SQ_ENTRIES(SQ_ENTRIES)) u_sq (
    .clk, .rst_n,
    .alloc_valid  (disp_fire && disp_uop.op == OP_STORE),
    .alloc_seq    (disp_uop.seq),
    .alloc_pc     (disp_uop.pc),
    .alloc_ready  (sq_ready),
    .ex_valid     (ex_store),
    .ex_seq       (ex_q.seq),
    .ex_addr      (ex_q.addr),
    .ex_data      (ex_q.data),
    .ex_pc        (st_pc),
    .ld_seq       (ex_q.seq),
    .ld_addr      (ex_q.addr),
    .fwd_hit,
    .fwd_data,
    .cm_valid     (cm_valid && cm_op == OP_STORE),
    .cm_seq,
    .mem_wr_valid,
    .mem_wr_addr,
    .mem_wr_data,
    .squash_valid,
    .squash_seq
  );

endmodule
