// corr_pkg -- constants and types shared by the multi-tau photon correlator.
//
// The numbers follow the design as published: S = 35 correlator blocks, the
// first with 16 channels and every later one with 8, a lag-time factor of 2
// from block to block (288 channels in all), 64-bit channel accumulators, a
// 100 MHz system clock and an 800 MHz input sample clock (8 samples per
// system cycle). The four controller states keep their published numbers 1..4.
// The counter width, the result-RAM depth and the register map are choices
// of this implementation, not published values.
package corr_pkg;

  // multi-tau geometry (published)
  localparam int unsigned S_BLOCKS  = 35;   // correlator blocks
  localparam int unsigned P_FIRST   = 16;   // channels in block 0
  localparam int unsigned P_OTHER   = 8;    // channels in blocks 1..S-1
  localparam int unsigned N_CH      = P_FIRST + (S_BLOCKS - 1) * P_OTHER;  // 288
  localparam int unsigned ACC_W     = 64;   // accumulator width
  localparam int unsigned SER_W     = 8;    // 800 MHz samples per 100 MHz cycle

  // readout period: 20 s at 100 MHz (published period, cycle count derived)
  localparam longint unsigned READOUT_CYCLES = 64'd2_000_000_000;

  // implementation choices
  localparam int unsigned CNT_W     = 16;   // photon interval counter width
  localparam int unsigned RAM_ROWS  = 256;  // readout periods kept in result RAM

  // first channel index of block s
  function automatic int unsigned chan_base(input int unsigned s,
                                            input int unsigned p_first,
                                            input int unsigned p_other);
    return (s == 0) ? 0 : p_first + (s - 1) * p_other;
  endfunction

  // controller states, numbered as in the published state diagram
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd1,   // "1": initial idle
    ST_READY = 3'd2,   // "2": ready for data processing
    ST_RUN   = 3'd3,   // "3": data processing
    ST_END   = 3'd4    // "4": end of operation, results are read out
  } fsm_state_t;

  // register map of the memory-mapped port (byte addresses, 32-bit words)
  typedef enum logic [4:0] {
    REG_CTRL    = 5'h00,  // RW  bit0 reset request, bit1 start (pulse), bit2 stop (pulse)
    REG_STATUS  = 5'h04,  // RO  [2:0] state, 3 dump busy, 4 RAM full, 5 overrun, [31:16] rows written
    REG_ROW     = 5'h08,  // RW  RAM row (readout period) to read
    REG_COL     = 5'h0C,  // RW  RAM column (channel) to read
    REG_DATA_LO = 5'h10,  // RO  bits 31:0 of RAM[row][col]
    REG_DATA_HI = 5'h14,  // RO  bits 63:32 of RAM[row][col]
    REG_INFO    = 5'h18   // RO  [15:0] channels, [23:16] blocks
  } reg_addr_t;

  // status flags gathered for the status register
  typedef struct packed {
    logic [15:0] rows_written;
    logic [9:0]  reserved;
    logic        overrun;
    logic        ram_full;
    logic        dump_busy;
    logic [2:0]  state;
  } status_t;

endpackage
