// tb_corr_block -- checks one multi-tau block against a direct sum.
// Two instances: a first block (16 channels, lags 0..15) and a later block
// (8 channels, lags 8..15). Random samples arrive with a random enable;
// clears at random times. After every clear the held values must equal
// sum over enabled steps of x[k] * x[k - lag], counted since the previous
// clear, with the samples before the restart counted as 0.
`timescale 1ns/1ps
module tb_corr_block;
  localparam int W = 20;
  logic clk = 0, rst_n = 0, restart = 0, en = 0, clear = 0;
  logic [W-1:0] x_in = '0;
  logic [W-1:0] n0, s0, n1, s1;
  logic [63:0]  hold0 [16];
  logic [63:0]  hold1 [8];
  int checks = 0, failures = 0, clears = 0;
  always #5 clk = ~clk;

  corr_block #(.W(W), .P(16), .LAG0(0)) dut0 (.clk, .rst_n, .restart, .en, .clear, .x_in,
                                             .newest(n0), .second(s0), .hold(hold0));
  corr_block #(.W(W), .P(8),  .LAG0(8)) dut1 (.clk, .rst_n, .restart, .en, .clear, .x_in,
                                             .newest(n1), .second(s1), .hold(hold1));

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned hist [$];       // samples since restart, newest last
  longint unsigned ref0 [16];
  longint unsigned ref1 [8];

  function automatic longint unsigned past(input int lag);
    int idx = hist.size() - 1 - lag;
    return (idx >= 0) ? hist[idx] : 0;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    restart <= 1; @(posedge clk); restart <= 0;
    foreach (ref0[c]) ref0[c] = 0;
    foreach (ref1[c]) ref1[c] = 0;
    for (int k = 0; k < 3000; k++) begin
      automatic bit e = ($urandom_range(0, 2) != 0);
      automatic bit c = ($urandom_range(0, 150) == 0) || (k == 2999);
      automatic logic [W-1:0] x = (k % 500 < 20) ? {W{1'b1}} : W'($urandom_range(0, 3000));
      en <= e; clear <= c; x_in <= x;
      if (e) begin
        hist.push_back(longint'(x));
        for (int ch = 0; ch < 16; ch++) ref0[ch] += longint'(x) * past(ch);
        for (int ch = 0; ch < 8; ch++)  ref1[ch] += longint'(x) * past(8 + ch);
      end
      @(posedge clk);
      #1;
      if (c) begin
        clears++;
        for (int ch = 0; ch < 16; ch++) begin
          checks++;
          if (hold0[ch] != ref0[ch]) begin failures++; $display("FAIL: block0 lag %0d got %0d exp %0d", ch, hold0[ch], ref0[ch]); end
          ref0[ch] = 0;
        end
        for (int ch = 0; ch < 8; ch++) begin
          checks++;
          if (hold1[ch] != ref1[ch]) begin failures++; $display("FAIL: block lag %0d got %0d exp %0d", 8+ch, hold1[ch], ref1[ch]); end
          ref1[ch] = 0;
        end
      end
      if (e) begin
        checks++;
        if (n0 != x || s0 != W'(past(1)) || n1 != x) begin failures++; $display("FAIL: newest/second outputs"); end
      end
    end
    en <= 0; clear <= 0;
    $display("clears=%0d", clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
