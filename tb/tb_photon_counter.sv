// tb_photon_counter -- checks the interval counter.
// First the four printed counter values of the published waveform, 6, 8, 3
// and 11, with one photon per 10 ns word; then a long random photon stream
// (pulses 8 samples wide as from the detector, and some narrow ones so that
// several events fall in one word), checked against intervals computed from
// the absolute sample index of every rising edge; then saturation.
`timescale 1ns/1ps
module tb_photon_counter;
  localparam int CNT_W = 10;
  logic clk = 0, rst_n = 0, restart = 0, enable = 0;
  logic [7:0] word = '0;
  logic [CNT_W-1:0] interval;
  logic has_event, saturated;
  int checks = 0, failures = 0;
  int sat_seen = 0, multi_seen = 0;
  always #5 clk = ~clk;

  photon_counter #(.W(8), .CNT_W(CNT_W)) dut (.clk, .rst_n, .restart, .enable, .word,
                                             .interval, .has_event, .saturated);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  longint last_edge;   // absolute sample index of last event (or restart)
  longint tick;        // absolute index of bit 0 of the current word
  bit     prev;

  // apply one word, return the expected output
  task automatic apply(input logic [7:0] w, output longint exp, output bit exp_ev);
    longint le = -1;
    int nev = 0;
    for (int i = 0; i < 8; i++) begin
      bit p = (i == 0) ? prev : w[i-1];
      if (w[i] && !p) begin le = tick + i; nev++; end
    end
    if (nev > 1) multi_seen++;
    prev = w[7];
    exp_ev = (le >= 0);
    exp = exp_ev ? le - last_edge : 0;
    if (exp >= (1 << CNT_W) - 1) begin exp = (1 << CNT_W) - 1; if (exp_ev) sat_seen++; end
    if (exp_ev) last_edge = le;
    word <= w;
    @(posedge clk);
    tick += 8;
  endtask

  task automatic run_words(input int n, input int mode);
    longint exp_q [$];
    bit     ev_q  [$];
    longint e; bit ev;
    int    pulse_left = 0;
    for (int k = 0; k < n; k++) begin
      logic [7:0] w;
      for (int i = 0; i < 8; i++) begin
        if (pulse_left > 0) begin w[i] = 1; pulse_left--; end
        else if (mode == 0 && $urandom_range(0, 40) == 0) begin w[i] = 1; pulse_left = 7; end
        else if (mode == 1 && $urandom_range(0, 5) == 0)  begin w[i] = 1; pulse_left = 0; end
        else w[i] = 0;
      end
      apply(w, e, ev);
      #1;
      check(interval == CNT_W'(e) && has_event == ev && saturated == (ev && e == (1 << CNT_W) - 1),
            $sformatf("word %0d: got %0d/%0b/%0b expected %0d/%0b", k, interval, has_event, saturated, e, ev));
    end
  endtask

  initial begin
    longint e; bit ev;
    int fig [4] = '{6, 8, 3, 11};
    logic [7:0] fw [4] = '{8'b0100_0000, 8'b0100_0000, 8'b0000_0010, 8'b0001_0000};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // start of measurement
    restart <= 1; enable <= 1; word <= '0;
    @(posedge clk);
    restart <= 0;
    prev = 0; tick = 0; last_edge = 0;
    // published waveform: one photon per 10 ns window
    for (int k = 0; k < 4; k++) begin
      apply(fw[k], e, ev);
      #1;
      check(interval == CNT_W'(fig[k]) && has_event,
            $sformatf("waveform value %0d: got %0d expected %0d", k, interval, fig[k]));
      check(e == fig[k], "reference agrees with the printed value");
    end
    // words without photons output 0
    apply(8'h00, e, ev); #1 check(interval == 0 && !has_event, "empty word gives 0");
    // detector-like 10 ns pulses
    run_words(3000, 0);
    // narrow pulses, several per word
    run_words(1000, 1);
    // long gap: saturation
    for (int k = 0; k < 200; k++) begin apply(8'h00, e, ev); #1; end
    run_words(50, 0);
    apply(8'h01, e, ev); #1
    check(interval == CNT_W'(e) && has_event, "event after long gap");
    check(sat_seen > 0, "saturation reached");
    check(multi_seen > 0, "several events in one word exercised");
    // disabled: no output
    enable <= 0;
    apply(8'h01, e, ev); #1 check(interval == 0 && !has_event, "no output while disabled");
    $display("saturations=%0d multi-event words=%0d", sat_seen, multi_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
