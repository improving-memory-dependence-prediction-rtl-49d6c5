// lfst: Last Fetched Store Table of the Store Sets predictor.
//
// One entry per store set ID: a valid bit and the sequence number of the
// youngest dispatched, not yet executed store of that set. A load or store
// that maps to a set is made to wait for that store.
//
// Interface and timing (all updates at the clock edge, lookup combinational):
//  - lk_ssid -> lk_valid/lk_seq: the store to wait for.
//  - ins_valid: a store of set ins_ssid was dispatched; it becomes the set's
//    last fetched store.
//  - exec_valid: store exec_seq has executed; every entry still naming it is
//    invalidated (matched by sequence number, so the entry is released even
//    if the SSIT has remapped the store's PC meanwhile).
//  - squash_valid: every entry naming a store not older than squash_seq is
//    invalidated (those stores were rolled back).
//  - clear: periodic reset of the whole table.
// Priority per entry: clear, then insertion, then invalidation. The caller
// never inserts in a squash cycle. The table and its role follow the paper;
// the release on execution and the squash handling are this design's choice.
module lfst
  import mdp_pkg::*;
#(
  parameter int unsigned LFST_ENTRIES = SMALL_SSIT_ENTRIES
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic [$clog2(LFST_ENTRIES)-1:0] lk_ssid,
  output logic                            lk_valid,
  output seq_t                            lk_seq,
  input  logic                            ins_valid,
  input  logic [$clog2(LFST_ENTRIES)-1:0] ins_ssid,
  input  seq_t                            ins_seq,
  input  logic                            exec_valid,
  input  seq_t                            exec_seq,
  input  logic                            squash_valid,
  input  seq_t                            squash_seq
);

  logic valid_q [LFST_ENTRIES];
  seq_t seq_q   [LFST_ENTRIES];

  always_comb begin
    lk_valid = valid_q[lk_ssid];
    lk_seq   = seq_q[lk_ssid];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LFST_ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        seq_q[i]   <= '0;
      end
    end else begin
      for (int i = 0; i < LFST_ENTRIES; i++) begin
        if (clear) begin
          valid_q[i] <= 1'b0;
        end else if (ins_valid && ins_ssid == i[$clog2(LFST_ENTRIES)-1:0]) begin
          valid_q[i] <= 1'b1;
          seq_q[i]   <= ins_seq;
        end else if (valid_q[i] &&
                     ((exec_valid && seq_q[i] == exec_seq) ||
                      (squash_valid && !seq_older(seq_q[i], squash_seq)))) begin
          valid_q[i] <= 1'b0;
        end
      end
    end
  end

endmodule
