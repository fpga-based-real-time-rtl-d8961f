// corr_axi_slave -- AXI4-Lite slave through which the soft processor runs
// the correlator.
//
// In the published system the processor reaches the programmable logic over
// an AXI interconnect, memory mapped; this is the correlator's end of that
// link. It holds the writable registers (control, RAM row, RAM column) and
// returns read data chosen by the result multiplexer. Register map (byte
// addresses, see corr_pkg::reg_addr_t):
//   0x00 CTRL     bit0 reset request (1 after reset), bit1 start, bit2 stop;
//                 writing 1 to bit1 or bit2 gives a one-cycle command pulse,
//                 those bits read back as 0
//   0x08 ROW, 0x0C COL   RAM position to read (16 bits each)
//   0x04 STATUS, 0x10 DATA_LO, 0x14 DATA_HI, 0x18 INFO   read only
// A write is taken when address and data are both valid, one at a time; a
// read returns data one cycle after the address handshake. Responses are
// always OKAY. The register map and handshake timing are this design's
// choices. The RAM has one cycle of read latency, so DATA_LO/HI must be read
// at least two cycles after ROW/COL were written; any bus transaction in
// between (the write response) is enough.
//
// Interface: AXI4-Lite slave signals (5-bit address, 32-bit data), then
// reset_req, start_cmd, stop_cmd, row, col, mux_addr and mux_data toward the
// result multiplexer.
module corr_axi_slave #(
  parameter int unsigned AW = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  // write address / data / response
  input  logic [AW-1:0] s_axi_awaddr,
  input  logic          s_axi_awvalid,
  output logic          s_axi_awready,
  input  logic [31:0]   s_axi_wdata,
  input  logic [3:0]    s_axi_wstrb,
  input  logic          s_axi_wvalid,
  output logic          s_axi_wready,
  output logic [1:0]    s_axi_bresp,
  output logic          s_axi_bvalid,
  input  logic          s_axi_bready,
  // read address / data
  input  logic [AW-1:0] s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  // correlator side
  output logic          reset_req,
  output logic          start_cmd,
  output logic          stop_cmd,
  output logic [15:0]   row,
  output logic [15:0]   col,
  output logic [31:0]   ctrl,
  output logic [4:0]    mux_addr,
  input  logic [31:0]   mux_data
);
  import corr_pkg::*;

  logic do_write;
  logic do_read;

  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign do_write      = s_axi_awready;
  assign s_axi_arready = !s_axi_rvalid;
  assign do_read       = s_axi_arvalid && s_axi_arready;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign mux_addr      = 5'(s_axi_araddr);
  assign ctrl          = {31'd0, reset_req};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      reset_req    <= 1'b1;
      start_cmd    <= 1'b0;
      stop_cmd     <= 1'b0;
      row          <= '0;
      col          <= '0;
    end else begin
      start_cmd <= 1'b0;
      stop_cmd  <= 1'b0;
      if (do_write) begin
        s_axi_bvalid <= 1'b1;
        if (s_axi_wstrb[0] || s_axi_wstrb[1]) begin
          unique case (5'(s_axi_awaddr))
            REG_CTRL: begin
              reset_req <= s_axi_wdata[0];
              start_cmd <= s_axi_wdata[1];
              stop_cmd  <= s_axi_wdata[2];
            end
            REG_ROW:  row <= s_axi_wdata[15:0];
            REG_COL:  col <= s_axi_wdata[15:0];
            default: ;
          endcase
        end
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (do_read) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= mux_data;
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, stays valid and unchanged until taken
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
endmodule
