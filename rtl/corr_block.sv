// corr_block -- one block of the multi-tau correlator.
//
// A block holds a delay line of its most recent HIST input samples and P
// correlation channels. Channel c accumulates the product of the newest sample
// with the sample LAG0 + c steps earlier, so block 0 (LAG0 = 0, P = 16) covers
// lags 0..15 and every later block (LAG0 = 8, P = 8) covers lags 8..15 in units
// of its own sample time. Everything happens in cycles where `en`, the block's
// clock enable, is high: the new sample x_in enters the delay line and all P
// products are added to the 64-bit accumulators in the same cycle, one
// multiplier per channel. The paper gives the block's channel count, its
// sample time and the 64-bit accumulator; the delay line, the parallel
// multipliers and the snapshot-on-clear are this design's choices.
//
// `clear` (the published clear signal) copies every accumulator, including
// the product of the current cycle, into a hold register and restarts the
// accumulator from zero, so no product is lost at a readout. `restart`
// empties the delay line and the accumulators at the start of a measurement.
// Accumulators wrap modulo 2**ACC_W; the periodic clear keeps them from
// reaching that.
//
// Interface: x_in (new sample), newest/second (the two most recent stored
// samples, summed to form the next block's input), hold[P] (accumulator
// values at the last clear). Latency: one cycle from en to the updated state.
module corr_block #(
  parameter int unsigned W     = 16,
  parameter int unsigned P     = 8,
  parameter int unsigned LAG0  = 8,
  parameter int unsigned ACC_W = corr_pkg::ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             en,
  input  logic             clear,
  input  logic [W-1:0]     x_in,
  output logic [W-1:0]     newest,
  output logic [W-1:0]     second,
  output logic [ACC_W-1:0] hold [P]
);
  localparam int unsigned HIST = LAG0 + P - 1;   // stored past samples

  logic [W-1:0]     hist_q [HIST];               // hist_q[k]: sample k+1 steps ago
  logic [ACC_W-1:0] acc_q  [P];
  logic [ACC_W-1:0] prod   [P];

  always_comb begin
    for (int c = 0; c < P; c++) begin
      if (LAG0 + c == 0) prod[c] = ACC_W'(x_in) * ACC_W'(x_in);
      else               prod[c] = ACC_W'(x_in) * ACC_W'(hist_q[LAG0 + c - 1]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      for (int k = 0; k < HIST; k++) hist_q[k] <= '0;
    end else if (en) begin
      hist_q[0] <= x_in;
      for (int k = 1; k < HIST; k++) hist_q[k] <= hist_q[k-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      for (int c = 0; c < P; c++) begin
        acc_q[c] <= '0;
        hold[c]  <= '0;
      end
    end else begin
      for (int c = 0; c < P; c++) begin
        if (clear) begin
          hold[c]  <= en ? acc_q[c] + prod[c] : acc_q[c];
          acc_q[c] <= '0;
        end else if (en) begin
          acc_q[c] <= acc_q[c] + prod[c];
        end
      end
    end
  end

  assign newest = hist_q[0];
  assign second = hist_q[1];
endmodule
