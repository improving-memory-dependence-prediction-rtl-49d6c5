// store_sets_mdp: Store Sets memory dependence predictor with PND bypass.
//
// Combines the SSIT, the LFST and the clear-period timer, and adds the
// "predict no dependency" (PND) behaviour: a load whose PND flag is set (and
// pnd_enable is high) makes no SSIT lookup, is given no predicted dependency
// and so may issue as soon as its registers are ready; and when such a load
// causes a memory order violation the predictor is not trained with it. The
// violation itself is still detected and rolled back by the load queue.
// With pnd_enable low every load is treated as unlabelled, which reproduces
// the baseline predictor on the same instruction stream.
//
// Dispatch (one memory op per cycle, combinational result):
//  - load:  SSIT[pc] valid and LFST[ssid] valid -> dep_valid/dep_seq.
//  - store: same lookup (a store waits for the previous store of its set),
//           and the store becomes its set's last fetched store.
// Other inputs act at the clock edge: st_exec releases LFST entries, squash
// removes rolled-back stores, viol trains the SSIT, and the clear timer wipes
// both tables every CLEAR_PERIOD memory operations (all dispatched memory
// operations are counted, labelled loads included).
// Statistic counters: lookup_count (SSIT lookups), pnd_skip_count (lookups
// skipped by labelled loads), train_count (violations trained),
// pnd_viol_count (violations by labelled loads, not trained), clear_count.
module store_sets_mdp
  import mdp_pkg::*;
#(
  parameter int unsigned SSIT_ENTRIES = SMALL_SSIT_ENTRIES,
  parameter int unsigned LFST_ENTRIES = SMALL_SSIT_ENTRIES,
  parameter int unsigned CLEAR_PERIOD = SMALL_CLEAR_PERIOD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pnd_enable,
  // dispatch
  input  logic        disp_valid,
  input  mem_op_e     disp_op,
  input  logic        disp_pnd,
  input  pc_t         disp_pc,
  input  seq_t        disp_seq,
  output logic        dep_valid,
  output seq_t        dep_seq,
  // store executed (address known)
  input  logic        st_exec_valid,
  input  seq_t        st_exec_seq,
  // memory order violation
  input  logic        viol_valid,
  input  pc_t         viol_load_pc,
  input  logic        viol_load_pnd,
  input  pc_t         viol_store_pc,
  // rollback of every op not older than squash_seq
  input  logic        squash_valid,
  input  seq_t        squash_seq,
  // status and statistics
  output logic        clear,
  output logic [31:0] lookup_count,
  output logic [31:0] pnd_skip_count,
  output logic [31:0] train_count,
  output logic [31:0] pnd_viol_count,
  output logic [31:0] clear_count
);

  localparam int unsigned SSID_W = $clog2(LFST_ENTRIES);

  logic              skip, lookup;
  logic              ssit_valid;
  logic [SSID_W-1:0] ssit_ssid;
  logic              lfst_valid;
  seq_t              lfst_seq;
  logic              train;
  logic [$clog2(CLEAR_PERIOD+1)-1:0] clear_cnt;

  assign skip   = disp_valid && disp_op == OP_LOAD && disp_pnd && pnd_enable;
  assign lookup = disp_valid && !skip;
  assign train  = viol_valid && !(viol_load_pnd && pnd_enable);

  ssit #(.SSIT_ENTRIES(SSIT_ENTRIES), .LFST_ENTRIES(LFST_ENTRIES)) u_ssit (
    .clk, .rst_n, .clear,
    .lookup_pc    (disp_pc),
    .lookup_valid (ssit_valid),
    .lookup_ssid  (ssit_ssid),
    .viol_valid   (train),
    .viol_load_pc,
    .viol_store_pc
  );

  lfst #(.LFST_ENTRIES(LFST_ENTRIES)) u_lfst (
    .clk, .rst_n, .clear,
    .lk_ssid      (ssit_ssid),
    .lk_valid     (lfst_valid),
    .lk_seq       (lfst_seq),
    .ins_valid    (lookup && disp_op == OP_STORE && ssit_valid && !squash_valid),
    .ins_ssid     (ssit_ssid),
    .ins_seq      (disp_seq),
    .exec_valid   (st_exec_valid),
    .exec_seq     (st_exec_seq),
    .squash_valid,
    .squash_seq
  );

  mdp_clear_timer #(.CLEAR_PERIOD(CLEAR_PERIOD)) u_timer (
    .clk, .rst_n,
    .mem_op (disp_valid),
    .clear,
    .count  (clear_cnt)
  );

  assign dep_valid = lookup && ssit_valid && lfst_valid;
  assign dep_seq   = lfst_seq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lookup_count   <= '0;
      pnd_skip_count <= '0;
      train_count    <= '0;
      pnd_viol_count <= '0;
      clear_count    <= '0;
    end else begin
      if (lookup)                 lookup_count   <= lookup_count + 1;
      if (skip)                   pnd_skip_count <= pnd_skip_count + 1;
      if (train)                  train_count    <= train_count + 1;
      if (viol_valid && !train)   pnd_viol_count <= pnd_viol_count + 1;
      if (clear)                  clear_count    <= clear_count + 1;
    end
  end

endmodule
