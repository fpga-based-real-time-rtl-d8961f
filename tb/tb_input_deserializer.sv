// tb_input_deserializer -- drives a random detector line at 800 MHz and
// checks that every 100 MHz word holds 8 consecutive samples, earliest in
// bit 0, with no sample lost or repeated from one word to the next.
`timescale 1ns/1ps
module tb_input_deserializer;
  logic clk_fast = 1, clk_sys = 1;
  logic rst_fast_n = 0, rst_sys_n = 0, din = 0;
  logic [7:0] word;
  int checks = 0, failures = 0;

  always #0.625 clk_fast = ~clk_fast;   // 800 MHz
  always #5     clk_sys  = ~clk_sys;    // 100 MHz, rising edges aligned

  input_deserializer #(.W(8)) dut (.clk_fast, .rst_fast_n, .din, .clk_sys, .rst_sys_n, .word);

  bit   smp [8192];
  int   nsmp = 0;
  logic [7:0] words [512];
  int   nw = 0;

  always @(negedge clk_fast) din <= ($urandom_range(0, 2) == 0);
  always @(posedge clk_fast) if (rst_fast_n) begin smp[nsmp] = din; nsmp++; end
  always @(posedge clk_sys) if (rst_sys_n && nw < 512) begin #0.1 words[nw] = word; nw++; end

  initial begin : watchdog
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    bit ok;
    #20 rst_fast_n = 1; rst_sys_n = 1;
    wait (nw == 300);
    // find the sample index of bit 0 of word 10
    base = -1;
    for (int b = 0; b < 200 && base < 0; b++) begin
      ok = 1;
      for (int w = 10; w < 20; w++)
        for (int i = 0; i < 8; i++)
          if (words[w][i] != smp[b + 8*(w-10) + i]) ok = 0;
      if (ok) base = b;
    end
    checks++;
    if (base < 0) begin failures++; $display("FAIL: no alignment of words with samples"); end
    else begin
      for (int w = 10; w < 290; w++) begin
        checks++;
        for (int i = 0; i < 8; i++)
          if (words[w][i] != smp[base + 8*(w-10) + i]) begin
            failures++; $display("FAIL: word %0d bit %0d", w, i); break;
          end
      end
      // latency: bit 7 of a word is at most 3 fast cycles old at the sys edge
      checks++;
      if (nsmp - (base + 8*(nw-1-10) + 7) > 20) begin
        failures++; $display("FAIL: latency too long");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
