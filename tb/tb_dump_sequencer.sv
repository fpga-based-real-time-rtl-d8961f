// tb_dump_sequencer -- 5 channels, 3 rows. Each request must write the 5
// held values, in channel order, to the next row in exactly 5 cycles; the
// fourth request finds the RAM full and is dropped; a request during a pass
// sets overrun; restart empties everything.
`timescale 1ns/1ps
module tb_dump_sequencer;
  localparam int NCH = 5, ROWS = 3;
  logic clk = 0, rst_n = 0, restart = 0, req = 0;
  logic [2:0] ch;
  logic [63:0] ch_data;
  logic we;
  logic [3:0] waddr;
  logic [63:0] wdata;
  logic busy, full, overrun;
  logic [1:0] rows_written;
  int checks = 0, failures = 0;
  int epoch = 0;
  logic [63:0] mem [16];
  int nwrites = 0;
  always #5 clk = ~clk;

  dump_sequencer #(.NCH(NCH), .ROWS(ROWS)) dut (.clk, .rst_n, .restart, .req, .ch, .ch_data,
    .we, .waddr, .wdata, .busy, .rows_written, .full, .overrun);

  // the "hold registers": value depends on channel and on the snapshot epoch
  assign ch_data = 64'(epoch) * 1000 + 64'(ch) + 64'hA000_0000_0000;

  always @(posedge clk) if (we) begin mem[waddr] = wdata; nwrites++; end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass_(input int row);
    int cyc = 0;
    int w0 = nwrites;
    epoch++;
    req <= 1; @(posedge clk); req <= 0;
    #1;
    while (busy) begin @(posedge clk); #1; cyc++; end
    check(cyc == NCH, $sformatf("pass took %0d cycles", cyc));
    check(nwrites - w0 == NCH, "one write per channel");
    for (int c = 0; c < NCH; c++)
      check(mem[row * NCH + c] == 64'(epoch) * 1000 + 64'(c) + 64'hA000_0000_0000,
            $sformatf("row %0d col %0d", row, c));
    check(32'(rows_written) == row + 1, "rows_written");
  endtask

  initial begin
    foreach (mem[i]) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    restart <= 1; @(posedge clk); restart <= 0;
    #1 check(!busy && !full && rows_written == 0 && !overrun, "empty after restart");
    pass_(0);
    repeat (3) @(posedge clk);
    pass_(1);
    // overrun: second request in the middle of a pass
    epoch++;
    req <= 1; @(posedge clk); req <= 0;
    @(posedge clk); @(posedge clk);
    req <= 1; @(posedge clk); req <= 0;
    #1 check(overrun, "overrun flagged");
    while (busy) @(posedge clk);
    #1 check(full && rows_written == 3, "full after 3 rows");
    // dropped when full
    begin
      automatic int w0 = nwrites;
      req <= 1; @(posedge clk); req <= 0;
      repeat (8) @(posedge clk);
      check(nwrites == w0 && !busy, "request dropped when full");
    end
    restart <= 1; @(posedge clk); restart <= 0;
    #1 check(!full && !overrun && rows_written == 0, "restart clears");
    pass_(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
