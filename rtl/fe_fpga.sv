// fe_fpga: front-end FPGA of one RPC readout board.
//
// One board reads 16 RPC strips through two 8-channel front-end ASICs,
// whose discriminated outputs enter here as in_hits. The FPGA turns hits
// into timestamped, zero-suppressed words and ships them to a concentrator
// over one 8b/10b serial link (tx_serial), without any trigger
// (triggerless mode) or, for tests such as cosmic-ray runs, only inside a
// window opened by a trigger command (trigger mode). The return link
// (rx_serial) brings fast commands and slow-control requests.
//
// Four blocks, wired as in the published block diagram:
//   data_block - acquisition, forming, zero suppression, timestamping,
//                buffering; FASTOR, empty, Data to the TX Block; en_rd back
//   tx_block   - priority scheduling, 8b/10b encoding, serialization
//   rx_block   - deserialization, 8b/10b decoding, fast commands (trigger,
//                clear to the Data Block), SC packets to the SC Block
//                (SC_rx with en_SC)
//   sc_block   - configuration registers (configuration to the Data
//                Block), replies to the TX Block (SC_tx with DTS/ACK)
//
// Interface: clk is the single clock, also the line bit rate; rst_n is an
// asynchronous active-low reset. lost_words, rx_locked, rx_errors and
// sc_dropped are status outputs for board monitoring; they are this
// design's addition.
module fe_fpga
  import fe_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] in_hits,
  input  logic            rx_serial,
  output logic            tx_serial,
  output logic [15:0]     lost_words,
  output logic            rx_locked,
  output logic [7:0]      rx_errors,
  output logic [7:0]      sc_dropped
);

  fe_cfg_t           cfg;
  logic              trigger, clear, en_sc;
  sc_pkt_t           sc_rx, sc_tx;
  logic              dts, ack;
  logic              fastor, empty, en_rd;
  logic [WORD_W-1:0] data;

  data_block #(.FIFO_DEPTH(FIFO_DEPTH)) u_data (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_hits    (in_hits),
    .cfg        (cfg),
    .trigger    (trigger),
    .clear      (clear),
    .en_rd      (en_rd),
    .data       (data),
    .empty      (empty),
    .fastor     (fastor),
    .lost_words (lost_words)
  );

  tx_block u_tx (
    .clk       (clk),
    .rst_n     (rst_n),
    .fastor    (fastor),
    .empty     (empty),
    .data      (data),
    .en_rd     (en_rd),
    .sc_tx     (sc_tx),
    .dts       (dts),
    .ack       (ack),
    .tx_serial (tx_serial)
  );

  rx_block u_rx (
    .clk       (clk),
    .rst_n     (rst_n),
    .rx_serial (rx_serial),
    .trigger   (trigger),
    .clear     (clear),
    .en_sc     (en_sc),
    .sc_rx     (sc_rx),
    .locked    (rx_locked),
    .rx_errors (rx_errors)
  );

  sc_block u_sc (
    .clk        (clk),
    .rst_n      (rst_n),
    .en_sc      (en_sc),
    .sc_rx      (sc_rx),
    .sc_tx      (sc_tx),
    .dts        (dts),
    .ack        (ack),
    .cfg        (cfg),
    .sc_dropped (sc_dropped)
  );

endmodule
