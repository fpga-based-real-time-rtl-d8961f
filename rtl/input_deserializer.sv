// input_deserializer -- fast input gate and 1:8 deserializer.
//
// The detector line is sampled by an input flip-flop on the 800 MHz sample
// clock (the "fast gate"), shifted into an 8-bit register and handed over
// once every 8 fast cycles as one parallel word to the 100 MHz system clock.
// Bit 0 of a word is the earliest of its 8 samples, bit 7 the latest.
// Sampling at 800 MHz and the 8-bit, 100 MHz output are as published; the
// shift register, the word hand-over and the bit order are this design's
// choices (a vendor deserializer primitive would do the same job).
//
// The two clocks must come from one clock generator with clk_fast at exactly
// 8 times clk_sys, so the fast-to-system word transfer is a timed path
// between related clocks: each system cycle receives exactly one new word,
// whatever phase the fast word counter has. Because the word register is
// reloaded every 8 fast cycles, a word is held for one full system period.
//
// Interface: clk_fast, rst_fast_n (reset synchronous to clk_fast), din (the
// detector line), clk_sys, rst_sys_n, word (8 samples, valid every clk_sys).
// Latency: a sample reaches `word` 1 fast cycle (input gate) plus up to 8 fast
// cycles (word assembly) plus 1 system cycle after it is taken.
module input_deserializer #(
  parameter int unsigned W = 8
) (
  input  logic         clk_fast,
  input  logic         rst_fast_n,
  input  logic         din,
  input  logic         clk_sys,
  input  logic         rst_sys_n,
  output logic [W-1:0] word
);
  logic                 gate_q;     // input sampling flip-flop
  logic [W-1:0]         shift_q;    // newest sample enters at the top
  logic [W-1:0]         word_fast;  // assembled word, fast domain
  logic [$clog2(W)-1:0] phase_q;

  always_ff @(posedge clk_fast) begin
    if (!rst_fast_n) begin
      gate_q    <= 1'b0;
      shift_q   <= '0;
      word_fast <= '0;
      phase_q   <= '0;
    end else begin
      gate_q  <= din;
      shift_q <= {gate_q, shift_q[W-1:1]};
      phase_q <= phase_q + 1'b1;
      if (phase_q == '0) word_fast <= {gate_q, shift_q[W-1:1]};
    end
  end

  always_ff @(posedge clk_sys) begin
    if (!rst_sys_n) word <= '0;
    else            word <= word_fast;
  end
endmodule
