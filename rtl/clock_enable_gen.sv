// clock_enable_gen -- clock enables e_s for the multi-tau correlator blocks.
//
// All correlator blocks run on the one system clock; block s advances only in
// cycles where its enable en[s] is high. As published, each block has a clock
// cycle counter c_s that runs from 1 to its period E_s and fires the enable
// when c_s equals E_s, then starts over. The period grows by the factor
// N = 2 per block, E_s = 2**s, so block 0 is enabled in every cycle and
// block s once every 2**s cycles. All counters restart together while `run`
// is low, so the enables stay aligned: every enable of block s coincides
// with an enable of block s-1. Using enables instead of divided clocks keeps
// the whole correlator in one clock domain.
//
// Interface: clk, rst_n, run (level: counting while high), en[S-1:0].
// Timing: in the k-th cycle with run high, en[s] is high when k is a
// multiple of 2**s. en is a combinational decode of the counter registers.
module clock_enable_gen #(
  parameter int unsigned S = corr_pkg::S_BLOCKS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run,
  output logic [S-1:0] en
);
  for (genvar s = 0; s < S; s++) begin : g_cnt
    localparam int unsigned    CW     = s + 1;              // holds 1 .. 2**s
    localparam logic [CW-1:0]  PERIOD = CW'(1) << s;        // E_s = 2**s
    logic [CW-1:0] c_q;

    always_ff @(posedge clk) begin
      if (!rst_n || !run)     c_q <= CW'(1);
      else if (c_q == PERIOD) c_q <= CW'(1);
      else                    c_q <= c_q + CW'(1);
    end

    assign en[s] = run && (c_q == PERIOD);
  end
endmodule
