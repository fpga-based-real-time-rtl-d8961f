// dump_sequencer -- moves the cleared accumulator values into the result RAM.
//
// Each readout request (the correlator's clear: the 20 s timer tick or the
// stop at the end of a measurement) starts one pass that writes the NCH
// channel values held at that clear into the next free row of the result
// RAM, one channel per cycle, column c holding channel c. A row is thus one
// readout period and the full result is the column-wise sum of the rows.
// The published design reads the accumulators out to block RAM with a 20 s
// cycle; the row-per-period layout (read back by the processor row by row,
// column by column) and this sequencing are this design's choices.
//
// A request while the RAM is full is dropped. A request during a pass
// would overwrite the held values being copied and sets the sticky
// `overrun` flag; it cannot happen with the published 20 s period.
//
// Interface: restart (start of measurement: row 0, flags cleared), req, ch
// (channel to read from the correlator), ch_data (its held value, same
// cycle), RAM write port (we, waddr = row * NCH + column, wdata), busy,
// rows_written, full, overrun. Timing: a pass takes NCH cycles, starting the
// cycle after req.
module dump_sequencer #(
  parameter int unsigned NCH   = corr_pkg::N_CH,
  parameter int unsigned ROWS  = corr_pkg::RAM_ROWS,
  parameter int unsigned ACC_W = corr_pkg::ACC_W,
  localparam int unsigned CH_W = $clog2(NCH),
  localparam int unsigned RW   = $clog2(ROWS + 1),
  localparam int unsigned AW   = $clog2(ROWS * NCH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             req,
  output logic [CH_W-1:0]  ch,
  input  logic [ACC_W-1:0] ch_data,
  output logic             we,
  output logic [AW-1:0]    waddr,
  output logic [ACC_W-1:0] wdata,
  output logic             busy,
  output logic [RW-1:0]    rows_written,
  output logic             full,
  output logic             overrun
);
  logic [AW-1:0] row_base_q;   // rows_written * NCH

  assign full  = (rows_written == RW'(ROWS));
  assign we    = busy;
  assign waddr = row_base_q + AW'(ch);
  assign wdata = ch_data;

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      busy         <= 1'b0;
      ch           <= '0;
      rows_written <= '0;
      row_base_q   <= '0;
      overrun      <= 1'b0;
    end else begin
      if (req && busy) overrun <= 1'b1;
      if (busy) begin
        if (32'(ch) == NCH - 1) begin
          busy         <= 1'b0;
          ch           <= '0;
          rows_written <= rows_written + 1'b1;
          row_base_q   <= row_base_q + AW'(NCH);
        end else begin
          ch <= ch + 1'b1;
        end
      end else if (req && !full) begin
        busy <= 1'b1;
        ch   <= '0;
      end
    end
  end
endmodule
