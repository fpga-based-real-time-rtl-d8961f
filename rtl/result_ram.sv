// result_ram -- block RAM holding the correlation results.
//
// ROWS x COLS words of W bits: row r, column c holds channel c accumulated
// over readout period r. One write port filled by the readout sequencer and
// one read port for the processor side, both on the system clock; the read
// data appear one cycle after the address (block RAM behaviour). The paper
// names the RAM and its row/column read-out; its depth is this design's
// choice (256 periods of 20 s, about 85 minutes of measurement, 4.7 Mbit).
//
// Interface: we, waddr, wdata; raddr, rdata (registered).
module result_ram #(
  parameter int unsigned ROWS = corr_pkg::RAM_ROWS,
  parameter int unsigned COLS = corr_pkg::N_CH,
  parameter int unsigned W    = corr_pkg::ACC_W,
  localparam int unsigned DEPTH = ROWS * COLS,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
