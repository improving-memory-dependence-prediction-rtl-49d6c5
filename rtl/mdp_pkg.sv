// mdp_pkg: types and constants shared by the memory-dependence unit.
//
// The unit is the load/store scheduling part of an out-of-order core with a
// Store Sets memory dependence predictor (MDP) and "predict no dependency"
// (PND) load labels: loads the compiler has proven free of in-loop store
// dependencies carry a PND flag, skip the MDP lookup and are never trained
// into it. The table sizes below are the "small" (phone-class) configuration;
// the larger configurations are obtained by overriding the module parameters.
//
// Widths of PCs, addresses and data follow AArch64 (64 bit). The sequence
// number width, the physical-register tag width and the µop layout are this
// design's own choices.
package mdp_pkg;

  localparam int unsigned PC_W   = 64;
  localparam int unsigned ADDR_W = 64;
  localparam int unsigned DATA_W = 64;
  // Instruction sequence numbers are compared modulo 2**SEQ_W; the in-flight
  // window (at most 1024 instructions in any configuration) is far smaller.
  localparam int unsigned SEQ_W  = 16;
  // Physical register tag used for register wakeup.
  localparam int unsigned TAG_W  = 8;

  // Default sizes: the small configuration. The clear period is the table
  // size x 244 (249856 operations per 1024 entries in the reference simulator).
  localparam int unsigned SMALL_SSIT_ENTRIES  = 32;
  localparam int unsigned SMALL_CLEAR_PERIOD  = 7808;
  localparam int unsigned SMALL_IQ_ENTRIES    = 64;
  localparam int unsigned SMALL_LSQ_ENTRIES   = 32;

  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [SEQ_W-1:0]  seq_t;
  typedef logic [TAG_W-1:0]  tag_t;

  typedef enum logic {
    OP_LOAD  = 1'b0,
    OP_STORE = 1'b1
  } mem_op_e;

  // One memory micro-op as it is dispatched. addr/data are the values the
  // op's source registers will hold; they become visible to the load/store
  // queues only when the op executes.
  typedef struct packed {
    mem_op_e op;
    logic    pnd;        // labelled "predict no dependency" load
    pc_t     pc;
    seq_t    seq;
    logic    src_ready;  // address/data operands already available
    tag_t    src_tag;    // register tag to wait for otherwise
    addr_t   addr;
    data_t   data;       // store data (ignored for loads)
  } mem_uop_t;

  // a is older than b (wrap-around safe).
  function automatic logic seq_older(seq_t a, seq_t b);
    seq_t d;
    d = a - b;
    return d[SEQ_W-1];
  endfunction

endpackage
