// tb_result_ram -- random writes and reads on a 6 x 7 RAM against an array
// model: data appear one cycle after the read address, a read of the address
// being written returns the old word, and every word can be written.
`timescale 1ns/1ps
module tb_result_ram;
  localparam int ROWS = 6, COLS = 7, DEPTH = ROWS * COLS, AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  result_ram #(.ROWS(ROWS), .COLS(COLS), .W(64)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] expect_q;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      we <= 1; waddr <= AW'(a); wdata <= {$urandom, $urandom};
      @(posedge clk);
      model[a] = wdata;
    end
    we <= 0;
    for (int k = 0; k < 2000; k++) begin
      automatic int ra = $urandom_range(0, DEPTH - 1);
      automatic int wa = ($urandom_range(0, 3) == 0) ? ra : $urandom_range(0, DEPTH - 1);
      automatic bit w = $urandom_range(0, 1);
      automatic logic [63:0] d = {$urandom, $urandom};
      raddr <= AW'(ra); we <= w; waddr <= AW'(wa); wdata <= d;
      expect_q = model[ra];          // read-before-write
      @(posedge clk);
      if (w) model[wa] = d;
      #1;
      checks++;
      if (rdata != expect_q) begin failures++; $display("FAIL: read %0d got %h exp %h", ra, rdata, expect_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
