// tb_dls_workload -- the correlator at its default size on a DLS-like photon
// stream at the count rate of the published measurements, about 5e6
// counts/s (one 10 ns detector pulse per 200 ns on average). The light
// intensity fluctuates: the pulse rate switches between 0.5x and 1.5x of the
// mean as a random telegraph signal with a 1 us correlation time, standing in
// for the scattered-light fluctuations of a particle suspension. The test
// releases the reset request, starts, runs 600 us (60,000 cycles, about 2800
// photons after the pulse dead time), stops by command, reads all 288
// channels of RAM row 0 over the AXI4-Lite port and compares each with a
// multi-tau reference computed from the 10 ns sample stream. It also checks
// the counter's intervals against the rising edges of the line and the photon
// count against the intended rate. The measurements of the published study
// (four particle sizes at four angles) differ only in their correlation times
// and last seconds to minutes; this test runs one such stream for 600 us.
`timescale 1ns/1ps
module tb_dls_workload;
  import corr_pkg::*;
  localparam int     S       = S_BLOCKS;
  localparam int     PF      = P_FIRST;
  localparam int     P       = P_OTHER;
  localparam int     CW      = CNT_W;
  localparam int     ROWS    = RAM_ROWS;
  localparam longint READOUT = READOUT_CYCLES;
  localparam int     RUN_A   = 60000;     // run cycles of measurement A
  localparam bit     DO_B    = 0;        // measurement B (RAM full, saturation)
  localparam int     NCH     = PF + (S - 1) * P;
  localparam int     MAXT    = 70000;

  logic clk_sys = 1, clk_fast = 1, arst_n = 0, clk_locked = 0, photon_in = 0;
  logic [4:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  fsm_state_t  state;
  logic        results_ready;
  int checks = 0, failures = 0;

  always #0.625 clk_fast = ~clk_fast;
  always #5     clk_sys  = ~clk_sys;

  dls_correlator_top dut (
    .clk_sys, .clk_fast, .arst_n, .clk_locked, .photon_in,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .state, .results_ready);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- detector line -------------------------------------
  int  pulse_left = 0;
  int  gap_left   = 0;
  bit  quiet      = 0;       // long photon-free gap requested
  longint smp_idx = 0;       // absolute 800 MHz sample index
  longint edges [$];         // sample index of every rising edge
  bit  prev_line  = 0;
  bit  tele       = 0;       // intensity state: 1 = 1.5x, 0 = 0.5x of the mean

  // random telegraph intensity, switching on average every 1 us (800 samples)
  always @(negedge clk_fast) if ($urandom_range(0, 799) == 0) tele <= ~tele;

  always @(negedge clk_fast) begin
    if (pulse_left > 0) begin photon_in <= 1; pulse_left--; end
    else if (gap_left > 0) begin photon_in <= 0; gap_left--; end
    else if (!quiet && $urandom_range(0, 99999) < (tele ? 938 : 313)) begin
      photon_in <= 1; pulse_left = 7; gap_left = $urandom_range(1, 6);
    end else photon_in <= 0;
  end

  always @(posedge clk_fast) begin
    if (photon_in && !prev_line) edges.push_back(smp_idx);
    prev_line = photon_in;
    smp_idx++;
  end

  // ---------------- observed 10 ns sample stream ----------------------
  longint unsigned xs [MAXT + 1];
  int  t_run = 0;
  int  n_sat = 0, n_tick = 0, n_dump = 0;
  int  n_en [S];
  bit  seen_state [5];
  longint nz_vals [$];

  // sampled only after the reset is released: register contents are random
  // before the first reset cycle
  always @(posedge clk_sys) if (arst_n) begin
    seen_state[int'(state)] = 1;
    if (dut.run) begin
      t_run++;
      if (t_run <= MAXT) xs[t_run] = longint'(dut.x0);
      if (dut.x0 != 0) nz_vals.push_back(longint'(dut.x0));
      for (int s = 0; s < S; s++) if (dut.blk_en[s]) n_en[s]++;
    end
    if (dut.rst_n && dut.cnt_sat) n_sat++;
    if (dut.tick) n_tick++;
    if (dut.dump_busy && 32'(dut.dump_ch) == NCH - 1) n_dump++;
  end

  // ---------------- processor-side bus tasks ---------------------------
  task automatic axi_write(input logic [4:0] a, input logic [31:0] d);
    @(posedge clk_sys);
    awaddr <= a; wdata <= d; awvalid <= 1; wvalid <= 1;
    do @(posedge clk_sys); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0; bready <= 1;
    do @(posedge clk_sys); while (!bvalid);
    bready <= 0;
  endtask

  task automatic axi_read(input logic [4:0] a, output logic [31:0] d);
    @(posedge clk_sys);
    araddr <= a; arvalid <= 1;
    do @(posedge clk_sys); while (!arready);
    arvalid <= 0; rready <= 1;
    do @(posedge clk_sys); while (!rvalid);
    d = rdata;
    rready <= 0;
  endtask

  // ---------------- reference ------------------------------------------
  function automatic longint unsigned y(input int s, input int k);
    longint unsigned sum = 0;
    if (k < 1) return 0;
    if (s == 0) return xs[k];
    for (int j = (k - 2) * (longint'(1) << s) + 2; j <= (k - 1) * (longint'(1) << s) + 1; j++)
      if (j >= 1) sum += xs[j];
    return sum;
  endfunction

  // expected RAM word for (row, ch): products of the run cycles in
  // (row*READOUT, min((row+1)*READOUT, t_end)]
  function automatic longint unsigned ref_word(input int row, input int ch, input int t_end);
    longint unsigned acc = 0;
    int s, c, lag, t0, t1;
    if (ch < PF) begin s = 0; c = ch; lag = c; end
    else begin s = 1 + (ch - PF) / P; c = (ch - PF) % P; lag = P + c; end
    t0 = row * int'(READOUT) + 1;
    t1 = ((row + 1) * int'(READOUT) < t_end) ? (row + 1) * int'(READOUT) : t_end;
    for (int t = t0; t <= t1; t++)
      if (t % (longint'(1) << s) == 0) begin
        automatic int k = t / (longint'(1) << s);
        acc += y(s, k) * y(s, k - lag);
      end
    return acc;
  endfunction

  task automatic read_and_compare(input int exp_rows, input int t_end, input string tag);
    logic [31:0] st, lo, hi;
    axi_read(REG_STATUS, st);
    check(int'(st[31:16]) == exp_rows, $sformatf("%s: %0d rows written, expected %0d", tag, st[31:16], exp_rows));
    for (int r = 0; r < exp_rows; r++) begin
      axi_write(REG_ROW, 32'(r));
      for (int c = 0; c < NCH; c++) begin
        automatic longint unsigned e = ref_word(r, c, t_end);
        axi_write(REG_COL, 32'(c));
        axi_read(REG_DATA_LO, lo);
        axi_read(REG_DATA_HI, hi);
        check({hi, lo} == e, $sformatf("%s: row %0d channel %0d got %0d expected %0d", tag, r, c, {hi, lo}, e));
      end
    end
  endtask

  task automatic check_intervals(input string tag);
    // every nonzero sample after the first is the gap between consecutive
    // rising edges (pulses are 8 samples plus a gap, so one edge per word)
    int m = -1;
    int nchk = 0;
    for (int i = 0; i + 3 < edges.size() && m < 0; i++)
      if (edges[i+1] - edges[i] == nz_vals[1] && edges[i+2] - edges[i+1] == nz_vals[2]
          && edges[i+3] - edges[i+2] == nz_vals[3]) m = i;
    check(m >= 0, {tag, ": counter intervals align with line edges"});
    if (m >= 0)
      for (int j = 1; j < nz_vals.size() && m + j < edges.size(); j++) begin
        automatic longint gap = edges[m+j] - edges[m+j-1];
        if (gap > (1 << CW) - 1) gap = (1 << CW) - 1;
        check(nz_vals[j] == gap, $sformatf("%s: interval %0d got %0d expected %0d", tag, j, nz_vals[j], gap));
        nchk++;
      end
    $display("%s: %0d intervals checked", tag, nchk);
  endtask

  // ---------------- test sequence ---------------------------------------
  initial begin
    logic [31:0] st;
    int t_stop;
    foreach (n_en[s]) n_en[s] = 0;
    #33 clk_locked = 1;
    #20 arst_n = 1;
    repeat (10) @(posedge clk_sys);
    check(state == ST_IDLE, "state 1 after reset");
    axi_read(REG_INFO, st);
    check(st == {8'd0, 8'(S), 16'(NCH)}, "info word");

    // ---- measurement A: stopped by command
    axi_write(REG_CTRL, 32'h0);               // reset request 0: state 2
    repeat (3) @(posedge clk_sys); check(state == ST_READY, "state 2");
    axi_write(REG_CTRL, 32'h2);               // start
    repeat (1) @(posedge clk_sys); check(state == ST_RUN, "state 3");
    wait (t_run >= RUN_A);
    axi_write(REG_CTRL, 32'h4);               // stop
    repeat (3) @(posedge clk_sys); check(state == ST_END, "state 4 after stop");
    t_stop = t_run;
    wait (results_ready);
    check_intervals("A");
    // 600 us at 5e6 counts/s is 3000 photons; the pulse dead time lowers it a little
    $display("A: %0d photons in %0d ns", nz_vals.size(), 10 * t_stop);
    check(nz_vals.size() > 2400 && nz_vals.size() < 3300, "A: count rate near 5e6 counts/s");
    read_and_compare((t_stop + int'(READOUT) - 1) / int'(READOUT), t_stop, "A");
    check(n_tick == t_stop / int'(READOUT), $sformatf("A: %0d timer clears", n_tick));
    axi_write(REG_CTRL, 32'h1);               // back to 1
    repeat (3) @(posedge clk_sys); check(state == ST_IDLE, "state 1 after readout");

    if (DO_B) begin
      // ---- measurement B: ends when the RAM is full
      t_run = 0;
      nz_vals.delete();
      axi_write(REG_CTRL, 32'h0);
      axi_write(REG_CTRL, 32'h2);
      wait (t_run >= 2000);
      quiet = 1;                                // photon-free gap beyond 2**CNT_W samples
      wait (t_run >= 2000 + ((1 << CW) / 8) + 400);
      quiet = 0;
      wait (state == ST_END);
      wait (results_ready);
      axi_read(REG_STATUS, st);
      check(st[4], "B: RAM full flag");
      read_and_compare(ROWS, ROWS * int'(READOUT), "B");
      check(n_sat > 0, "B: counter saturated in the long gap");
      axi_write(REG_CTRL, 32'h1);
    end

    // ---- mechanisms
    for (int s = 0; s < S; s++)
      check((n_en[s] > 0) == ((longint'(1) << s) <= RUN_A), $sformatf("block %0d enables", s));
    for (int k = 1; k <= 4; k++) check(seen_state[k], $sformatf("state %0d visited", k));
    check(n_tick == 0, "no timer clear within the run");
    check(n_dump > 0, "dump pass happened");
    $display("mechanisms: timer clears=%0d dump passes=%0d saturations=%0d run cycles(last)=%0d",
             n_tick, n_dump, n_sat, t_run);
    for (int s = 0; s < 13; s++) $display("  block %0d enables=%0d", s, n_en[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
