// tb_clock_enable_gen -- checks, at the full 35 blocks, that enable s fires
// exactly in run cycles that are multiples of 2**s, that block 0 fires in
// every run cycle, and that all counters restart when run drops.
`timescale 1ns/1ps
module tb_clock_enable_gen;
  localparam int S = 35;
  logic clk = 0, rst_n = 0, run = 0;
  logic [S-1:0] en;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clock_enable_gen dut (.clk, .rst_n, .run, .en);

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_for(input int n);
    for (int k = 1; k <= n; k++) begin
      logic [S-1:0] exp;
      for (int s = 0; s < S; s++) exp[s] = (s < 31) ? ((k % (1 << s)) == 0) : 1'b0;
      #1;
      checks++;
      if (en !== exp) begin
        failures++;
        $display("FAIL: run cycle %0d en=%h expected %h", k, en, exp);
      end
      @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1 checks++; if (en != 0) begin failures++; $display("FAIL: enable while idle"); end
    run <= 1;
    run_for(1100);
    run <= 0;
    @(posedge clk);
    #1 checks++; if (en != 0) begin failures++; $display("FAIL: enable after stop"); end
    @(posedge clk);
    run <= 1;
    run_for(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
