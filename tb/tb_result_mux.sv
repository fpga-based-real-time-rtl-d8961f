// tb_result_mux -- every register address returns its source, and unmapped
// addresses return 0.
`timescale 1ns/1ps
module tb_result_mux;
  import corr_pkg::*;
  logic [4:0]  addr;
  logic [31:0] ctrl, data;
  status_t     status;
  logic [15:0] row, col;
  logic [63:0] ram_rdata;
  int checks = 0, failures = 0;

  result_mux #(.NCH(288), .S(35)) dut (.addr, .ctrl, .status, .row, .col, .ram_rdata, .data);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 50; k++) begin
      ctrl = $urandom; status = $urandom; row = 16'($urandom); col = 16'($urandom);
      ram_rdata = {$urandom, $urandom};
      for (int a = 0; a < 32; a++) begin
        automatic logic [31:0] exp;
        addr = 5'(a);
        case (a)
          'h00: exp = ctrl;
          'h04: exp = status;
          'h08: exp = {16'd0, row};
          'h0C: exp = {16'd0, col};
          'h10: exp = ram_rdata[31:0];
          'h14: exp = ram_rdata[63:32];
          'h18: exp = {8'd0, 8'd35, 16'd288};
          default: exp = 0;
        endcase
        #1;
        checks++;
        if (data != exp) begin failures++; $display("FAIL: addr %h got %h exp %h", a, data, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
