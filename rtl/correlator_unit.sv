// correlator_unit -- the multi-tau autocorrelator: S blocks, one clock.
//
// Block 0 takes one sample per system cycle (10 ns), the photon interval from
// the counter, and correlates it over 16 lags of 10 ns. Block s >= 1 takes one
// sample every 2**s cycles, the sum of the two most recent samples stored in
// block s-1, and correlates it over lags 8..15 of its own sample time
// 2**s x 10 ns. With the published S = 35 this gives 16 + 34 x 8 = 288
// channels, lags from 0 up to 15 x 2**34 x 10 ns (about 43 minutes) and a
// last-block sample time of about 2.9 minutes. Each block's samples are
// W0 + s bits wide, so sums never overflow.
//
// Block s reads the two samples of block s-1 from registers, so its input
// bins trail the block 0 stream by 2**s - 1 cycles. The delay is the same for
// both factors of every product of a block, so the correlation is unchanged;
// there is no adder chain through the blocks.
//
// Control, as published: clock enables (from clock_enable_gen), clear
// (snapshot and reset of all accumulators), start and stop. Here `run` is
// high between start and stop, and `restart` is the start pulse that empties
// all delay lines and accumulators.
//
// Interface: x0 (W0-bit sample), rd_ch / rd_data (combinational read of the
// value a channel held at the last clear; channel numbers run block by block,
// block 0 lags 0..15 first), en (the block enables, for observation).
module correlator_unit #(
  parameter int unsigned S       = corr_pkg::S_BLOCKS,
  parameter int unsigned P_FIRST = corr_pkg::P_FIRST,
  parameter int unsigned P       = corr_pkg::P_OTHER,
  parameter int unsigned W0      = corr_pkg::CNT_W,
  parameter int unsigned ACC_W   = corr_pkg::ACC_W,
  localparam int unsigned NCH    = P_FIRST + (S - 1) * P,
  localparam int unsigned CH_W   = $clog2(NCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic             restart,
  input  logic             clear,
  input  logic [W0-1:0]    x0,
  input  logic [CH_W-1:0]  rd_ch,
  output logic [ACC_W-1:0] rd_data,
  output logic [S-1:0]     en
);
  logic [ACC_W-1:0] hold_all [NCH];

  clock_enable_gen #(.S(S)) u_en (
    .clk   (clk),
    .rst_n (rst_n),
    .run   (run),
    .en    (en)
  );

  for (genvar s = 0; s < S; s++) begin : g_blk
    localparam int unsigned W    = W0 + s;
    localparam int unsigned PB   = (s == 0) ? P_FIRST : P;
    localparam int unsigned LAG0 = (s == 0) ? 0 : P;
    localparam int unsigned BASE = corr_pkg::chan_base(s, P_FIRST, P);

    logic [W-1:0]     x_in;
    logic [W-1:0]     newest;
    logic [W-1:0]     second;
    logic [ACC_W-1:0] hold [PB];

    if (s == 0) begin : g_in
      assign x_in = x0;
    end else begin : g_in
      assign x_in = W'(g_blk[s-1].newest) + W'(g_blk[s-1].second);
    end

    corr_block #(.W(W), .P(PB), .LAG0(LAG0), .ACC_W(ACC_W)) u_blk (
      .clk     (clk),
      .rst_n   (rst_n),
      .restart (restart),
      .en      (en[s]),
      .clear   (clear),
      .x_in    (x_in),
      .newest  (newest),
      .second  (second),
      .hold    (hold)
    );

    for (genvar c = 0; c < PB; c++) begin : g_hold
      assign hold_all[BASE + c] = hold[c];
    end
  end

  assign rd_data = (32'(rd_ch) < NCH) ? hold_all[rd_ch] : '0;
endmodule
