// reset_sync -- reset distribution for one clock domain.
//
// The system gives every block one reset from a common source. This module
// asserts its active-low reset output at once when the external reset is
// asserted or the clock generator reports that it is not locked. It releases
// the output only after STAGES rising edges of the local clock, so every
// flip-flop of the domain leaves reset in the same cycle. The paper only
// names the reset system; the synchroniser and its depth are this design's
// choice.
//
// Interface: clk, arst_n (asynchronous, active low), locked (clock stable),
// rst_n (output, asserted asynchronously, released synchronously).
// Timing: release STAGES cycles after arst_n and locked are both high.
module reset_sync #(
  parameter int unsigned STAGES = 3
) (
  input  logic clk,
  input  logic arst_n,
  input  logic locked,
  output logic rst_n
);
  logic [STAGES-1:0] sync_q;
  logic              hold_n;

  assign hold_n = arst_n & locked;

  always_ff @(posedge clk or negedge hold_n) begin
    if (!hold_n) sync_q <= '0;
    else         sync_q <= {sync_q[STAGES-2:0], 1'b1};
  end

  assign rst_n = sync_q[STAGES-1];
endmodule
