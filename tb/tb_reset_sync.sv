// tb_reset_sync -- checks that the reset output asserts at once with the
// external reset or a lost clock lock, and releases exactly STAGES clock
// edges after both are good again.
`timescale 1ns/1ps
module tb_reset_sync;
  logic clk = 0, arst_n = 0, locked = 0, rst_n;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  reset_sync #(.STAGES(3)) dut (.clk, .arst_n, .locked, .rst_n);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 check(!rst_n, "held in reset while arst_n low");
    arst_n = 1;
    repeat (4) begin @(posedge clk); #1 check(!rst_n, "held while not locked"); end
    locked = 1;
    // release after exactly 3 edges
    @(posedge clk); #1 check(!rst_n, "edge 1: still in reset");
    @(posedge clk); #1 check(!rst_n, "edge 2: still in reset");
    @(posedge clk); #1 check(rst_n,  "edge 3: released");
    repeat (5) begin @(posedge clk); #1 check(rst_n, "stays released"); end
    // asynchronous assertion between clock edges
    #2 arst_n = 0; #0.5 check(!rst_n, "asserts without a clock edge");
    #3 arst_n = 1;
    repeat (2) @(posedge clk); #1 check(!rst_n, "2 edges after release: still in reset");
    @(posedge clk); #1 check(rst_n, "3 edges after release: released");
    #2 locked = 0; #0.5 check(!rst_n, "lost lock asserts reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
