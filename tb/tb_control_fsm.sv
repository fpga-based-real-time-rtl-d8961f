// tb_control_fsm -- walks the controller through 1 -> 2 -> 3 -> 4 -> 1 twice,
// once stopped by command and once by a full RAM, and checks the states,
// the run level, the one-cycle start/stop pulses and results_ready.
`timescale 1ns/1ps
module tb_control_fsm;
  import corr_pkg::*;
  logic clk = 0, rst_n = 0;
  logic reset_req = 1, start_cmd = 0, stop_cmd = 0, ram_full = 0, dump_busy = 0;
  fsm_state_t state;
  logic run, start_pulse, stop_pulse, results_ready;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0;
  always #5 clk = ~clk;

  control_fsm dut (.clk, .rst_n, .reset_req, .start_cmd, .stop_cmd, .ram_full, .dump_busy,
                   .state, .run, .start_pulse, .stop_pulse, .results_ready);

  always @(posedge clk) begin
    if (start_pulse) n_start++;
    if (stop_pulse)  n_stop++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (state %0d)", what, state); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    step(); check(state == ST_IDLE && !run, "reset: state 1");
    step(); check(state == ST_IDLE, "stays in 1 while reset request is 1");
    start_cmd <= 1; step(); start_cmd <= 0;
    check(state == ST_IDLE, "start ignored in state 1");
    reset_req <= 0; step(); check(state == ST_READY && !run, "reset = 0: state 2");
    repeat (3) begin step(); check(state == ST_READY, "waits in 2"); end
    start_cmd <= 1; #1 check(start_pulse, "start pulse in last cycle of state 2");
    step(); start_cmd <= 0;
    check(state == ST_RUN && run && !start_pulse, "state 3, run high");
    repeat (5) begin step(); check(state == ST_RUN && run, "stays in 3"); end
    stop_cmd <= 1; step(); stop_cmd <= 0;
    check(state == ST_END && !run && stop_pulse, "stop: state 4 with stop pulse");
    check(!results_ready, "not ready during stop pulse");
    dump_busy <= 1; step(); check(!stop_pulse && !results_ready, "not ready while dump busy");
    dump_busy <= 0; step(); check(results_ready && state == ST_END, "ready in state 4");
    reset_req <= 1; step(); check(state == ST_IDLE, "reset = 1: back to 1");
    // second measurement, ended by a full RAM
    reset_req <= 0; step(); check(state == ST_READY, "state 2 again");
    start_cmd <= 1; step(); start_cmd <= 0; check(state == ST_RUN, "state 3 again");
    repeat (4) step();
    ram_full <= 1; step(); check(state == ST_END && stop_pulse, "full RAM ends processing");
    ram_full <= 0; step(); check(state == ST_END, "stays in 4");
    reset_req <= 1; step(); check(state == ST_IDLE, "back to 1");
    // reset request aborts state 2
    reset_req <= 0; step(); reset_req <= 1; step(); check(state == ST_IDLE, "2 -> 1 on reset request");
    check(n_start == 2 && n_stop == 2, $sformatf("pulse counts %0d/%0d", n_start, n_stop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
