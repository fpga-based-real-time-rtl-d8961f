// photon_counter -- interval counter for photon events.
//
// Each 100 MHz cycle the counter receives 8 samples of the detector line taken
// at 800 MHz (bit 0 earliest). A photon event is a rising edge of the line:
// a sample at 1 whose predecessor (in the same word, or the last sample of
// the previous word) is 0. The counter keeps the number of 800 MHz sample
// periods elapsed since the last event. For a word containing events it
// outputs the number of sample periods from the last event before the word to
// the last event in the word; for a word without events it outputs 0. With
// at most one event per word, as at the count rates used in practice, the
// output is exactly the interval between consecutive photons, in units of
// 1.25 ns. The output is therefore the published "number of clock cycles
// between two events", presented once per 10 ns. Two or more events in one
// word yield the sum of their intervals, and a word with no event yields 0:
// these two rules, the rising-edge detection and saturation at 2**CNT_W-1
// are this design's choices.
//
// `restart` (start of a measurement) makes the start instant count as the
// previous event, so the first output is measured from the start.
//
// Interface: clk, rst_n, restart, enable (count only while high), word,
// interval (CNT_W bits), has_event. Latency: one cycle, one result per cycle.
module photon_counter #(
  parameter int unsigned W     = 8,
  parameter int unsigned CNT_W = corr_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             enable,
  input  logic [W-1:0]     word,
  output logic [CNT_W-1:0] interval,
  output logic             has_event,
  output logic             saturated   // interval is at its maximum 2**CNT_W-1 (clipped)
);
  localparam logic [CNT_W:0] MAXV = {1'b0, {CNT_W{1'b1}}};

  logic             prev_bit_q;
  logic [CNT_W-1:0] since_q;        // sample periods from last event to word start
  logic [W-1:0]     edges;
  logic             any_edge;
  logic [$clog2(W)-1:0] last_pos;
  logic [CNT_W:0]   sum_full;
  logic [CNT_W:0]   idle_full;

  always_comb begin
    edges[0] = word[0] & ~prev_bit_q;
    for (int i = 1; i < W; i++) edges[i] = word[i] & ~word[i-1];
    any_edge = |edges;
    last_pos = '0;
    for (int i = 0; i < W; i++) if (edges[i]) last_pos = i[$clog2(W)-1:0];
    sum_full  = {1'b0, since_q} + (CNT_W+1)'(last_pos);
    idle_full = {1'b0, since_q} + (CNT_W+1)'(W);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_bit_q <= 1'b0;
      since_q    <= '0;
      interval   <= '0;
      has_event  <= 1'b0;
      saturated  <= 1'b0;
    end else begin
      prev_bit_q <= word[W-1];
      if (restart) begin
        since_q   <= '0;
        interval  <= '0;
        has_event <= 1'b0;
        saturated <= 1'b0;
      end else if (!enable) begin
        interval  <= '0;
        has_event <= 1'b0;
        saturated <= 1'b0;
      end else if (any_edge) begin
        interval  <= (sum_full >= MAXV) ? MAXV[CNT_W-1:0] : sum_full[CNT_W-1:0];
        saturated <= (sum_full >= MAXV);
        has_event <= 1'b1;
        since_q   <= CNT_W'(W - 32'(last_pos));
      end else begin
        interval  <= '0;
        has_event <= 1'b0;
        saturated <= 1'b0;
        since_q   <= (idle_full > MAXV) ? MAXV[CNT_W-1:0] : idle_full[CNT_W-1:0];
      end
    end
  end
endmodule
