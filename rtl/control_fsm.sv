// control_fsm -- measurement controller.
//
// Four states, numbered as published: 1 idle, 2 ready for data processing,
// 3 data processing, 4 end of operation. The published diagram marks
// "reset = 1" at state 1 and "reset = 0" toward state 2, and sends START on
// entering processing and STOP on leaving it. The triggers are this design's
// choice, as the paper gives none beyond the reset labels:
//   1 -> 2  when the reset request from the processor is 0
//   2 -> 3  on a start command              (issues start: `start_pulse`)
//   3 -> 4  on a stop command or when the result RAM is full
//                                           (issues stop: `stop_pulse`)
//   4 -> 1  when the reset request is 1 again (the processor has read out)
//   2 -> 1  when the reset request is 1
// `run` is high in state 3 only; `results_ready` is high in state 4 once the
// last readout into RAM has finished.
//
// Interface: clk, rst_n, reset_req, start_cmd, stop_cmd, ram_full,
// dump_busy, state, run, start_pulse, stop_pulse, results_ready.
// Timing: one cycle per transition. start_pulse is high in the last cycle of
// state 2, so everything is emptied one cycle before `run` rises; stop_pulse
// is high in the first cycle of state 4, after `run` has fallen.
module control_fsm
  import corr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       reset_req,
  input  logic       start_cmd,
  input  logic       stop_cmd,
  input  logic       ram_full,
  input  logic       dump_busy,
  output fsm_state_t state,
  output logic       run,
  output logic       start_pulse,
  output logic       stop_pulse,
  output logic       results_ready
);
  fsm_state_t next;

  always_comb begin
    next = state;
    unique case (state)
      ST_IDLE:  if (!reset_req)            next = ST_READY;
      ST_READY: if (reset_req)             next = ST_IDLE;
                else if (start_cmd)        next = ST_RUN;
      ST_RUN:   if (stop_cmd || ram_full)  next = ST_END;
      ST_END:   if (reset_req)             next = ST_IDLE;
      default:                             next = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      stop_pulse  <= 1'b0;
    end else begin
      state       <= next;
      stop_pulse  <= (state == ST_RUN) && (next == ST_END);
    end
  end

  assign start_pulse   = (state == ST_READY) && (next == ST_RUN);
  assign run           = (state == ST_RUN);
  assign results_ready = (state == ST_END) && !dump_busy && !stop_pulse;
endmodule
