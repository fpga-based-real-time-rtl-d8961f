// tb_readout_timer -- checks the readout tick with a short period (37
// cycles; the 2e9-cycle default would take hours to reach): one tick in
// every PERIOD run cycles, the first PERIOD cycles after the start, and a
// restart of the count whenever run drops.
`timescale 1ns/1ps
module tb_readout_timer;
  localparam longint PER = 37;
  logic clk = 0, rst_n = 0, run = 0, tick;
  int checks = 0, failures = 0, ticks = 0;
  always #5 clk = ~clk;

  readout_timer #(.PERIOD(PER)) dut (.clk, .rst_n, .run, .tick);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_for(input int n);
    for (int k = 1; k <= n; k++) begin
      #1;
      checks++;
      if (tick != (k % PER == 0)) begin failures++; $display("FAIL: run cycle %0d tick=%0b", k, tick); end
      if (tick) ticks++;
      @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (3) begin @(posedge clk); #1 checks++; if (tick) failures++; end
    run <= 1;
    run_for(200);
    run <= 0;
    repeat (3) begin @(posedge clk); #1 checks++; if (tick) failures++; end
    run <= 1;
    run_for(100);
    checks++;
    if (ticks != 5 + 2) begin failures++; $display("FAIL: %0d ticks", ticks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
