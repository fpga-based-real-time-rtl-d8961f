// readout_timer -- periodic readout request for the correlator.
//
// The 64-bit channel accumulators must be read out to the result RAM every
// 20 s to avoid overflow (published). This timer counts system cycles while
// a measurement runs and pulses `tick` for one cycle every PERIOD cycles:
// 2e9 cycles of the 100 MHz clock, i.e. 20 s. The tick drives the
// correlator's clear. The counter restarts whenever `run` is low, so the
// first tick comes PERIOD cycles after the start.
//
// Interface: clk, rst_n, run, tick. Timing: tick is high in the k-th run
// cycle for k a multiple of PERIOD.
module readout_timer #(
  parameter longint unsigned PERIOD = corr_pkg::READOUT_CYCLES,
  localparam int unsigned    TW     = $clog2(PERIOD + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  output logic tick
);
  logic [TW-1:0] cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n || !run)       cnt_q <= TW'(1);
    else if (cnt_q == TW'(PERIOD)) cnt_q <= TW'(1);
    else                      cnt_q <= cnt_q + TW'(1);
  end

  assign tick = run && (cnt_q == TW'(PERIOD));
endmodule
