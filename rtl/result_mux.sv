// result_mux -- read-data multiplexer between the correlator and the bus.
//
// The processor sees the correlator through 32-bit words. This multiplexer
// picks, by register address, the word returned on a read: the control
// register, the status word (controller state and readout flags), the
// selected RAM row and column, the low or high half of the 64-bit RAM word
// at that row and column, or a fixed information word giving the number of
// channels and blocks. The published system diagram places a MUX between
// the result RAM and the bus; what it selects among is this design's choice.
// Unmapped addresses read as 0.
//
// Interface: addr (byte address), the sources, data. Purely combinational.
module result_mux
  import corr_pkg::*;
#(
  parameter int unsigned NCH = corr_pkg::N_CH,
  parameter int unsigned S   = corr_pkg::S_BLOCKS
) (
  input  logic [4:0]  addr,
  input  logic [31:0] ctrl,
  input  status_t     status,
  input  logic [15:0] row,
  input  logic [15:0] col,
  input  logic [63:0] ram_rdata,
  output logic [31:0] data
);
  always_comb begin
    unique case (addr)
      REG_CTRL:    data = ctrl;
      REG_STATUS:  data = status;
      REG_ROW:     data = {16'd0, row};
      REG_COL:     data = {16'd0, col};
      REG_DATA_LO: data = ram_rdata[31:0];
      REG_DATA_HI: data = ram_rdata[63:32];
      REG_INFO:    data = {8'd0, 8'(S), 16'(NCH)};
      default:     data = '0;
    endcase
  end
endmodule
