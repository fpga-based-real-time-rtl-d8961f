// tb_correlator_unit -- checks the multi-tau correlator (7 blocks, 64
// channels) against a reference computed straight from the input stream.
// The reference forms the sample of block s at its k-th enable as the sum of
// the 2**s block-0 samples x0[(k-2)*2**s + 2 .. (k-1)*2**s + 1] (0 before the
// start) and adds y[k] * y[k - lag] for every channel. Clears at irregular
// run cycles; after each one every channel's held value is read back through
// rd_ch and compared. Also checks that run low freezes everything.
`timescale 1ns/1ps
module tb_correlator_unit;
  localparam int S = 7, PF = 16, P = 8, W0 = 12;
  localparam int NCH = PF + (S - 1) * P;
  localparam int NRUN = 3000;
  logic clk = 0, rst_n = 0, run = 0, restart = 0, clear = 0;
  logic [W0-1:0] x0 = '0;
  logic [$clog2(NCH)-1:0] rd_ch = '0;
  logic [63:0] rd_data;
  logic [S-1:0] en;
  int checks = 0, failures = 0, clears = 0;
  always #5 clk = ~clk;

  correlator_unit #(.S(S), .P_FIRST(PF), .P(P), .W0(W0)) dut (
    .clk, .rst_n, .run, .restart, .clear, .x0, .rd_ch, .rd_data, .en);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned xs [NRUN + 1];
  longint unsigned refacc [NCH];

  function automatic longint unsigned y(input int s, input int k);
    longint unsigned sum = 0;
    if (k < 1) return 0;
    if (s == 0) return xs[k];
    for (int j = (k - 2) * (1 << s) + 2; j <= (k - 1) * (1 << s) + 1; j++)
      if (j >= 1) sum += xs[j];
    return sum;
  endfunction

  function automatic int base(input int s);
    return (s == 0) ? 0 : PF + (s - 1) * P;
  endfunction

  task automatic compare_all(input string when);
    for (int c = 0; c < NCH; c++) begin
      rd_ch = c[$clog2(NCH)-1:0];
      #0.05;
      checks++;
      if (rd_data != refacc[c]) begin
        failures++;
        $display("FAIL: %s channel %0d got %0d expected %0d", when, c, rd_data, refacc[c]);
      end
      refacc[c] = 0;
    end
  endtask

  initial begin
    int next_clear = 437;
    for (int t = 0; t <= NRUN; t++)
      xs[t] = (t == 0) ? 0 : ((t / 300) % 2 == 0) ? (($urandom_range(0, 20) == 0) ? $urandom_range(1, 4095) : 0)
                                                 : $urandom_range(0, 4095);
    foreach (refacc[c]) refacc[c] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    restart <= 1;
    @(posedge clk);
    restart <= 0;
    run <= 1;
    for (int t = 1; t <= NRUN; t++) begin
      automatic bit c = (t == next_clear) || (t == NRUN);
      x0 <= W0'(xs[t]);
      clear <= c;
      for (int s = 0; s < S; s++) begin
        if (t % (1 << s) == 0) begin
          automatic int k = t / (1 << s);
          automatic int pb = (s == 0) ? PF : P;
          automatic int l0 = (s == 0) ? 0 : P;
          for (int ch = 0; ch < pb; ch++)
            refacc[base(s) + ch] += y(s, k) * y(s, k - (l0 + ch));
        end
      end
      @(posedge clk);
      #1;
      checks++;
      for (int s = 0; s < S; s++)
        if (en[s] != ((t + 1) % (1 << s) == 0)) begin
          failures++; $display("FAIL: enable %0d at run cycle %0d", s, t + 1); break;
        end
      if (c) begin
        clears++;
        compare_all($sformatf("clear at run cycle %0d", t));
        next_clear = t + 300 + $urandom_range(0, 400);
      end
    end
    // stopped: a clear with run low must hold zeros
    run <= 0; clear <= 0;
    repeat (5) @(posedge clk);
    clear <= 1; @(posedge clk); clear <= 0; #1;
    compare_all("clear while stopped");
    $display("clears=%0d", clears);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
