// tb_corr_axi_slave -- AXI4-Lite transactions against the register port:
// control writes give one-cycle command pulses and the reset request level,
// ROW/COL are written and read back, reads return the multiplexer word for
// the address, responses wait for a late ready, and address and data
// arriving on different cycles are handled.
`timescale 1ns/1ps
module tb_corr_axi_slave;
  logic clk = 0, rst_n = 0;
  logic [4:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0;
  logic [3:0] wstrb = 4'hF;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic [31:0] rdata;
  logic reset_req, start_cmd, stop_cmd;
  logic [15:0] row, col;
  logic [31:0] ctrl, mux_data;
  logic [4:0] mux_addr;
  int checks = 0, failures = 0, n_start = 0, n_stop = 0;
  always #5 clk = ~clk;

  corr_axi_slave dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .reset_req, .start_cmd, .stop_cmd, .row, .col, .ctrl, .mux_addr, .mux_data);

  // stand-in multiplexer: registers read back, other addresses a pattern
  always_comb begin
    case (mux_addr)
      5'h00: mux_data = ctrl;
      5'h08: mux_data = {16'd0, row};
      5'h0C: mux_data = {16'd0, col};
      default: mux_data = 32'hC0DE_0000 | 32'(mux_addr);
    endcase
  end

  always @(posedge clk) if (rst_n) begin
    if (start_cmd) n_start++;
    if (stop_cmd)  n_stop++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [4:0] a, input logic [31:0] d, input int skew, input int bdelay);
    awaddr <= a; wdata <= d;
    if (skew >= 0) awvalid <= 1;
    if (skew <= 0) wvalid <= 1;
    repeat (skew < 0 ? -skew : skew) @(posedge clk);
    awvalid <= 1; wvalid <= 1;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    repeat (bdelay) begin @(posedge clk); #1 check(bvalid && bresp == 0, "bvalid held until bready"); end
    bready <= 1;
    do @(posedge clk); while (!bvalid);
    bready <= 0;
    @(posedge clk); #1;
  endtask

  task automatic axi_read(input logic [4:0] a, input int rdelay, output logic [31:0] d);
    araddr <= a; arvalid <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    repeat (rdelay) @(posedge clk);
    rready <= 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    rready <= 0;
    check(rresp == 0, "read response OKAY");
  endtask

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check(reset_req == 1, "reset request is 1 after reset");
    axi_write(5'h00, 32'h0, 0, 0);
    #1 check(reset_req == 0 && n_start == 0, "reset request cleared");
    axi_write(5'h00, 32'h2, 1, 2);
    check(n_start == 1 && reset_req == 0, "start pulse");
    axi_write(5'h00, 32'h4, -2, 0);
    check(n_stop == 1 && n_start == 1, "stop pulse");
    axi_write(5'h08, 32'h1234_0007, 0, 0);
    axi_write(5'h0C, 32'h0000_0123, 0, 1);
    check(row == 16'h0007 && col == 16'h0123, "row and column registers");
    axi_read(5'h08, 0, d); check(d == 32'h7, "read row");
    axi_read(5'h0C, 3, d); check(d == 32'h123, "read column with late rready");
    for (int a = 4; a < 32; a += 4) begin
      axi_read(5'(a), a % 3, d);
      if (a != 8 && a != 12) check(d == (32'hC0DE_0000 | a), $sformatf("read %h", a));
    end
    axi_write(5'h00, 32'h1, 0, 0);
    axi_read(5'h00, 0, d); check(d == 1 && reset_req, "reset request set and read back");
    check(n_start == 1 && n_stop == 1, "no spurious pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
