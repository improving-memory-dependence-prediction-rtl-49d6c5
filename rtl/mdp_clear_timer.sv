// mdp_clear_timer: clear-period counter of the Store Sets predictor.
//
// Counts memory operations and pulses `clear` (combinationally, in the cycle
// of the CLEAR_PERIOD-th operation) so that both predictor tables are wiped
// at that clock edge; the count then restarts from zero. This keeps the
// tables from saturating. The default period, 7808, is the small
// configuration's (32 entries x 244); larger configurations scale it with
// the table size. At most one memory operation is counted per cycle.
// The period and its purpose are the paper's; the counter itself is the
// simplest circuit that does it.
module mdp_clear_timer
  import mdp_pkg::*;
#(
  parameter int unsigned CLEAR_PERIOD = SMALL_CLEAR_PERIOD
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              mem_op,
  output logic                              clear,
  output logic [$clog2(CLEAR_PERIOD+1)-1:0] count
);

  localparam int unsigned CW = $clog2(CLEAR_PERIOD + 1);

  assign clear = mem_op && (count == CW'(CLEAR_PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (clear)  count <= '0;
    else if (mem_op) count <= count + 1'b1;
  end

endmodule
