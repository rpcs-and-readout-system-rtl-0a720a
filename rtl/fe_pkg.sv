// fe_pkg: types and constants shared by the blocks of the RPC front-end FPGA.
//
// The front-end FPGA reads the 16 discriminated channels of one front-end
// board, turns hits into timestamped words and sends them over one 8b/10b
// serial link; the same link in the other direction carries fast commands
// (trigger, clear) and slow-control requests. The channel count (16) is the
// board's; every width, code point and register address below is this
// design's own choice, since none is published for this front end.
package fe_pkg;

  // Number of input channels per front-end board (two 8-channel ASICs).
  localparam int unsigned N_CH = 16;
  // Timestamp width: free-running counter in clock cycles, cleared by the
  // clear fast command.
  localparam int unsigned TS_W = 16;
  // Stored hit word: {timestamp, hit pattern}.
  localparam int unsigned WORD_W = TS_W + N_CH;

  // ---- 8b/10b special characters (K codes), as the 8-bit value ----
  localparam logic [7:0] K28_0 = 8'h1C;  // slow-control packet start
  localparam logic [7:0] K28_2 = 8'h5C;  // fast command: trigger (RX)
  localparam logic [7:0] K28_3 = 8'h7C;  // fast command: clear (RX)
  localparam logic [7:0] K28_5 = 8'hBC;  // comma, sent when idle
  localparam logic [7:0] K28_6 = 8'hDC;  // FASTOR notice (TX)
  localparam logic [7:0] K27_7 = 8'hFB;  // data packet start (TX)
  localparam logic [7:0] K29_7 = 8'hFD;  // end of packet (both ways)

  // ---- slow control ----
  typedef enum logic [7:0] {
    SC_WRITE = 8'h01,
    SC_READ  = 8'h02
  } sc_cmd_e;

  // Register addresses.
  localparam logic [7:0] REG_CH_MASK   = 8'h00;  // 1 = channel masked off
  localparam logic [7:0] REG_CONTROL   = 8'h01;  // bit0: trigger mode
  localparam logic [7:0] REG_TRIG_WIN  = 8'h02;  // trigger window, cycles
  localparam logic [7:0] REG_DEAD_TIME = 8'h03;  // per-channel dead time, cycles

  // One slow-control request or reply: command, address, 16-bit data.
  typedef struct packed {
    logic [7:0]  cmd;
    logic [7:0]  addr;
    logic [15:0] data;
  } sc_pkt_t;

  // Configuration the SC Block hands to the Data Block.
  typedef struct packed {
    logic [N_CH-1:0] ch_mask;
    logic            trig_mode;   // 0: triggerless, 1: trigger mode
    logic [7:0]      trig_win;
    logic [7:0]      dead_time;
  } fe_cfg_t;

  localparam fe_cfg_t CFG_RESET = '{ch_mask: '0, trig_mode: 1'b0,
                                    trig_win: 8'd16, dead_time: 8'd4};

endpackage
