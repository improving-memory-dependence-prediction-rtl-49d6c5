// ssit: Store Set ID Table of the Store Sets memory dependence predictor.
//
// A direct-mapped table indexed by instruction PC (bits above the 4-byte
// instruction offset). Each entry holds a valid bit and a store set ID
// (SSID), which indexes the LFST. Unrelated PCs that share an index share an
// entry: this index collision is what creates false dependencies, and what
// PND-labelled loads avoid by never reading or training the table.
//
// Interface and timing:
//  - lookup_pc -> lookup_valid/lookup_ssid is combinational from the table
//    registers (an update made in a cycle is seen from the next cycle).
//  - viol_valid trains the table at the clock edge with the classic Store
//    Sets rules: neither PC has a set -> both get a new SSID derived from the
//    load PC; one has a set -> the other joins it; both have sets -> both take
//    the smaller SSID.
//  - clear invalidates every entry at the edge and wins over training.
// The table organisation (PC-indexed, power-of-two size, periodic clear)
// follows the paper; the training rules and the SSID derivation are those of
// the original Store Sets algorithm as implemented in common simulators.
module ssit
  import mdp_pkg::*;
#(
  parameter int unsigned SSIT_ENTRIES = SMALL_SSIT_ENTRIES,
  parameter int unsigned LFST_ENTRIES = SMALL_SSIT_ENTRIES
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  // lookup
  input  pc_t                             lookup_pc,
  output logic                            lookup_valid,
  output logic [$clog2(LFST_ENTRIES)-1:0] lookup_ssid,
  // training on a memory order violation
  input  logic                            viol_valid,
  input  pc_t                             viol_load_pc,
  input  pc_t                             viol_store_pc
);

  localparam int unsigned IDX_W  = $clog2(SSIT_ENTRIES);
  localparam int unsigned SSID_W = $clog2(LFST_ENTRIES);

  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [SSID_W-1:0] ssid_t;

  logic  valid_q [SSIT_ENTRIES];
  ssid_t ssid_q  [SSIT_ENTRIES];

  function automatic idx_t pc_index(pc_t pc);
    return idx_t'(pc >> 2);
  endfunction

  function automatic ssid_t pc_ssid(pc_t pc);
    return ssid_t'(pc >> 2);
  endfunction

  always_comb begin
    lookup_valid = valid_q[pc_index(lookup_pc)];
    lookup_ssid  = ssid_q[pc_index(lookup_pc)];
  end

  idx_t  ld_idx, st_idx;
  logic  ld_v, st_v;
  ssid_t ld_s, st_s, new_ssid;

  always_comb begin
    ld_idx = pc_index(viol_load_pc);
    st_idx = pc_index(viol_store_pc);
    ld_v   = valid_q[ld_idx];
    st_v   = valid_q[st_idx];
    ld_s   = ssid_q[ld_idx];
    st_s   = ssid_q[st_idx];
    unique case ({ld_v, st_v})
      2'b00:   new_ssid = pc_ssid(viol_load_pc);
      2'b10:   new_ssid = ld_s;
      2'b01:   new_ssid = st_s;
      default: new_ssid = (ld_s < st_s) ? ld_s : st_s;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SSIT_ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        ssid_q[i]  <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < SSIT_ENTRIES; i++) valid_q[i] <= 1'b0;
    end else if (viol_valid) begin
      valid_q[ld_idx] <= 1'b1;
      ssid_q[ld_idx]  <= new_ssid;
      valid_q[st_idx] <= 1'b1;
      ssid_q[st_idx]  <= new_ssid;
    end
  end

endmodule
