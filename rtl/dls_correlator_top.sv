// dls_correlator_top -- programmable-logic part of the photon correlator.
//
// Photon pulses from the detector enter on photon_in. They are sampled at
// 800 MHz and deserialized into 8-sample words at 100 MHz
// (input_deserializer). The interval counter turns each word into one 10 ns
// sample holding the time between photons in 1.25 ns units (photon_counter).
// The multi-tau correlator (correlator_unit: 35 blocks, 288 channels, 64-bit
// accumulators, lags from 10 ns to about 43 minutes) correlates that stream.
// Every 20 s and at the stop of a measurement the accumulators are cleared
// into hold registers (readout_timer); dump_sequencer then copies them into
// one row of the result RAM. The processor, on the far side of an AXI
// interconnect, drives the four-state controller (control_fsm) and reads the
// RAM row by row and column by column through the AXI4-Lite slave and the
// result multiplexer. The block structure and its connections follow the
// published system and process-control diagrams. The processor, its local
// memory, the interconnect, the UART and the clock generator are not part of
// this module: the AXI slave port, both clocks and the clock-locked flag are
// ports.
//
// Physical results: a value read from channel c is the sum, over the rows,
// of products of interval counts; multiplying by 1.25**2 converts it to ns**2.
// That scaling is left to the host, as published.
//
// Clocks: clk_fast must be exactly 8 x clk_sys and phase related (one
// clock generator); clk_sys is 100 MHz at the published rate.
module dls_correlator_top #(
  parameter int unsigned     S       = corr_pkg::S_BLOCKS,
  parameter int unsigned     P_FIRST = corr_pkg::P_FIRST,
  parameter int unsigned     P       = corr_pkg::P_OTHER,
  parameter int unsigned     CNT_W   = corr_pkg::CNT_W,
  parameter int unsigned     ACC_W   = corr_pkg::ACC_W,
  parameter int unsigned     ROWS    = corr_pkg::RAM_ROWS,
  parameter longint unsigned READOUT = corr_pkg::READOUT_CYCLES,
  localparam int unsigned    NCH     = P_FIRST + (S - 1) * P,
  localparam int unsigned    CH_W    = $clog2(NCH),
  localparam int unsigned    RAM_AW  = $clog2(ROWS * NCH),
  localparam int unsigned    RW      = $clog2(ROWS + 1)
) (
  input  logic        clk_sys,
  input  logic        clk_fast,
  input  logic        arst_n,
  input  logic        clk_locked,
  input  logic        photon_in,
  // AXI4-Lite slave toward the processor's interconnect
  input  logic [4:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [4:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // state, for the processor's interrupt-free polling or board LEDs
  output corr_pkg::fsm_state_t state,
  output logic        results_ready
);
  logic rst_n, rst_fast_n;
  localparam int unsigned SER_W = corr_pkg::SER_W;
  logic [SER_W-1:0] word;
  logic [CNT_W-1:0] x0;
  logic has_event, cnt_sat;
  logic run, start_pulse, stop_pulse;
  logic tick, corr_clear;
  logic [S-1:0] blk_en;
  logic [CH_W-1:0]  dump_ch;
  logic [ACC_W-1:0] dump_data;
  logic ram_we;
  logic [RAM_AW-1:0] ram_waddr, ram_raddr;
  logic [ACC_W-1:0]  ram_wdata, ram_rdata;
  logic dump_busy, ram_full, overrun;
  logic [RW-1:0] rows_written;
  logic reset_req, start_cmd, stop_cmd;
  logic [15:0] row_sel, col_sel;
  logic [31:0] ctrl_word, mux_data;
  logic [4:0]  mux_addr;
  corr_pkg::status_t status;

  // reset system
  reset_sync u_rst_sys  (.clk(clk_sys),  .arst_n(arst_n), .locked(clk_locked), .rst_n(rst_n));
  reset_sync u_rst_fast (.clk(clk_fast), .arst_n(arst_n), .locked(clk_locked), .rst_n(rst_fast_n));

  // photon detection / counting
  input_deserializer #(.W(SER_W)) u_deser (
    .clk_fast   (clk_fast),
    .rst_fast_n (rst_fast_n),
    .din        (photon_in),
    .clk_sys    (clk_sys),
    .rst_sys_n  (rst_n),
    .word       (word)
  );

  photon_counter #(.W(SER_W), .CNT_W(CNT_W)) u_counter (
    .clk       (clk_sys),
    .rst_n     (rst_n),
    .restart   (start_pulse),
    .enable    (run),
    .word      (word),
    .interval  (x0),
    .has_event (has_event),
    .saturated (cnt_sat)
  );

  // process control
  control_fsm u_fsm (
    .clk           (clk_sys),
    .rst_n         (rst_n),
    .reset_req     (reset_req),
    .start_cmd     (start_cmd),
    .stop_cmd      (stop_cmd),
    .ram_full      (ram_full),
    .dump_busy     (dump_busy),
    .state         (state),
    .run           (run),
    .start_pulse   (start_pulse),
    .stop_pulse    (stop_pulse),
    .results_ready (results_ready)
  );

  readout_timer #(.PERIOD(READOUT)) u_timer (
    .clk   (clk_sys),
    .rst_n (rst_n),
    .run   (run),
    .tick  (tick)
  );

  assign corr_clear = tick | stop_pulse;

  // correlator
  correlator_unit #(.S(S), .P_FIRST(P_FIRST), .P(P), .W0(CNT_W), .ACC_W(ACC_W)) u_corr (
    .clk     (clk_sys),
    .rst_n   (rst_n),
    .run     (run),
    .restart (start_pulse),
    .clear   (corr_clear),
    .x0      (x0),
    .rd_ch   (dump_ch),
    .rd_data (dump_data),
    .en      (blk_en)
  );

  // readout into RAM
  dump_sequencer #(.NCH(NCH), .ROWS(ROWS), .ACC_W(ACC_W)) u_dump (
    .clk          (clk_sys),
    .rst_n        (rst_n),
    .restart      (start_pulse),
    .req          (corr_clear),
    .ch           (dump_ch),
    .ch_data      (dump_data),
    .we           (ram_we),
    .waddr        (ram_waddr),
    .wdata        (ram_wdata),
    .busy         (dump_busy),
    .rows_written (rows_written),
    .full         (ram_full),
    .overrun      (overrun)
  );

  assign ram_raddr = RAM_AW'(32'(row_sel) * NCH + 32'(col_sel));

  result_ram #(.ROWS(ROWS), .COLS(NCH), .W(ACC_W)) u_ram (
    .clk   (clk_sys),
    .we    (ram_we),
    .waddr (ram_waddr),
    .wdata (ram_wdata),
    .raddr (ram_raddr),
    .rdata (ram_rdata)
  );

  // processor side
  always_comb begin
    status              = '0;
    status.state        = state;
    status.dump_busy    = dump_busy;
    status.ram_full     = ram_full;
    status.overrun      = overrun;
    status.rows_written = 16'(rows_written);
  end

  result_mux #(.NCH(NCH), .S(S)) u_mux (
    .addr      (mux_addr),
    .ctrl      (ctrl_word),
    .status    (status),
    .row       (row_sel),
    .col       (col_sel),
    .ram_rdata (64'(ram_rdata)),
    .data      (mux_data)
  );

  corr_axi_slave #(.AW(5)) u_axi (
    .clk           (clk_sys),
    .rst_n         (rst_n),
    .s_axi_awaddr  (s_axi_awaddr),
    .s_axi_awvalid (s_axi_awvalid),
    .s_axi_awready (s_axi_awready),
    .s_axi_wdata   (s_axi_wdata),
    .s_axi_wstrb   (s_axi_wstrb),
    .s_axi_wvalid  (s_axi_wvalid),
    .s_axi_wready  (s_axi_wready),
    .s_axi_bresp   (s_axi_bresp),
    .s_axi_bvalid  (s_axi_bvalid),
    .s_axi_bready  (s_axi_bready),
    .s_axi_araddr  (s_axi_araddr),
    .s_axi_arvalid (s_axi_arvalid),
    .s_axi_arready (s_axi_arready),
    .s_axi_rdata   (s_axi_rdata),
    .s_axi_rresp   (s_axi_rresp),
    .s_axi_rvalid  (s_axi_rvalid),
    .s_axi_rready  (s_axi_rready),
    .reset_req     (reset_req),
    .start_cmd     (start_cmd),
    .stop_cmd      (stop_cmd),
    .row           (row_sel),
    .col           (col_sel),
    .ctrl          (ctrl_word),
    .mux_addr      (mux_addr),
    .mux_data      (mux_data)
  );
endmodule
