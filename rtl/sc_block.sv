// sc_block: slow-control register file of the front-end FPGA.
//
// The RX Block hands over each slow-control request it has received as a
// {cmd, addr, data} packet (sc_rx) with a one-cycle strobe (en_sc). A
// WRITE stores data into the addressed configuration register; a READ
// leaves the registers as they are. Either way the block answers with a
// reply packet on sc_tx: the command, the address and the register's
// content after the request (so a write is echoed as a confirmation). The
// reply is offered to the TX Block with dts ("data to send") held high
// until the TX Block returns a one-cycle ack when it takes the packet. A
// request arriving while a reply is still waiting is dropped and counted
// in sc_dropped. A request to an unknown address or with an unknown
// command changes nothing and is answered with data 16'hFFFF.
//
// Registers (reset value): 0x00 channel mask (0x0000), 0x01 control, bit 0
// trigger mode (0), 0x02 trigger window in cycles (16), 0x03 dead time in
// cycles (4). cfg presents them to the Data Block.
//
// Timing: the register changes and dts rises on the clock edge after
// en_sc; dts falls on the edge after ack.
//
// That slow-control packets go to a block of their own, which configures
// the Data Block and replies through the TX Block with the SC_tx, DTS and
// ACK signals, follows the published block diagram; the register map, the
// reply rule and the handshake direction are this design's choices.
module sc_block
  import fe_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en_sc,
  input  sc_pkt_t sc_rx,
  output sc_pkt_t sc_tx,
  output logic    dts,
  input  logic    ack,
  output fe_cfg_t cfg,
  output logic [7:0] sc_dropped
);

  logic        known;
  logic [15:0] rd_val, wr_val;

  // Register content after the request
  always_comb begin
    known  = 1'b1;
    rd_val = 16'hFFFF;
    unique case (sc_rx.addr)
      REG_CH_MASK:   rd_val = cfg.ch_mask;
      REG_CONTROL:   rd_val = {15'd0, cfg.trig_mode};
      REG_TRIG_WIN:  rd_val = {8'd0, cfg.trig_win};
      REG_DEAD_TIME: rd_val = {8'd0, cfg.dead_time};
      default:       known  = 1'b0;
    endcase
    if (!(sc_rx.cmd == SC_WRITE || sc_rx.cmd == SC_READ)) known = 1'b0;
    wr_val = sc_rx.data;
    unique case (sc_rx.addr)
      REG_CONTROL:   wr_val = {15'd0, sc_rx.data[0]};
      REG_TRIG_WIN,
      REG_DEAD_TIME: wr_val = {8'd0, sc_rx.data[7:0]};
      default:       ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= CFG_RESET;
      sc_tx      <= '0;
      dts        <= 1'b0;
      sc_dropped <= '0;
    end else begin
      if (dts && ack) dts <= 1'b0;
      if (en_sc) begin
        if (dts && !ack) begin
          if (sc_dropped != 8'hFF) sc_dropped <= sc_dropped + 8'd1;
        end else begin
          dts         <= 1'b1;
          sc_tx.cmd   <= sc_rx.cmd;
          sc_tx.addr  <= sc_rx.addr;
          sc_tx.data  <= known ? ((sc_rx.cmd == SC_WRITE) ? wr_val : rd_val) : 16'hFFFF;
          if (known && sc_rx.cmd == SC_WRITE) begin
            unique case (sc_rx.addr)
              REG_CH_MASK:   cfg.ch_mask   <= sc_rx.data;
              REG_CONTROL:   cfg.trig_mode <= sc_rx.data[0];
              REG_TRIG_WIN:  cfg.trig_win  <= sc_rx.data[7:0];
              REG_DEAD_TIME: cfg.dead_time <= sc_rx.data[7:0];
              default:       ;
            endcase
          end
        end
      end
    end
  end

  // Handshake rule: the reply stays stable while it waits for ack.
  property p_reply_stable;
    @(posedge clk) disable iff (!rst_n) (dts && !ack) |=> (dts && $stable(sc_tx));
  endproperty
  assert property (p_reply_stable);

endmodule
