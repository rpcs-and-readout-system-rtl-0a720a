// tx_block: packet scheduler, 8b/10b encoder and serializer of the
// front-end-to-concentrator link.
//
// The link carries one bit per clock cycle, so one 10-bit code group takes
// ten cycles. On the last bit of every group the scheduler chooses the next
// byte. Between packets it picks, by priority:
//   1. a FASTOR notice, the single control character K28.6, if the Data
//      Block has raised fastor since the last notice and the previous group
//      was not itself a notice (so a fastor held high cannot starve the
//      packets below);
//   2. the slow-control reply waiting on sc_tx (dts high): K28.0, cmd,
//      addr, data[15:8], data[7:0], K29.7; ack pulses as it is taken;
//   3. the oldest hit word of the Data Block (empty low): K27.7,
//      timestamp[15:8], timestamp[7:0], hits[15:8], hits[7:0], K29.7;
//      en_rd pulses as it is taken;
//   4. otherwise the comma K28.5 as idle character.
// A packet, once started, is sent to its end. Each byte goes through
// enc8b10b with the running disparity held here; the group is shifted
// out bit 9 (bit a) first.
//
// Interface: fastor, empty/data/en_rd (Data Block, first-word fall-through
// FIFO head), sc_tx/dts/ack (SC Block), tx_serial (line). After reset the
// line sends commas, the first one starting in the cycle after reset.
// Timing: a packet of six groups occupies the line for 60 cycles; en_rd
// and ack are one-cycle pulses in the cycle the packet's first group is
// loaded.
//
// That the TX Block gives packets priorities, encodes in 8b/10b and
// serializes, and its FASTOR, empty, en_rd, Data, SC_tx, DTS and ACK
// signals follow the published block diagram; the packet formats, the
// order of priorities and the line rate of one bit per clock are this
// design's choices.
module tx_block
  import fe_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fastor,
  input  logic              empty,
  input  logic [WORD_W-1:0] data,
  output logic              en_rd,
  input  sc_pkt_t           sc_tx,
  input  logic              dts,
  output logic              ack,
  output logic              tx_serial
);

  typedef enum logic [1:0] {PK_NONE, PK_SC, PK_DATA} pk_e;

  logic [3:0]  bitcnt;
  logic [9:0]  shreg;
  logic        rd;
  logic [2:0]  pos;           // index of the next group in the packet
  pk_e         pk;
  logic [7:0]  buf_q [4];     // packet payload
  logic        fastor_pend, last_fastor;
  logic        load;

  logic [7:0]  nbyte;
  logic        nk;
  logic [9:0]  code;
  logic        rd_next;
  logic        kerr;
  logic        take_fastor, take_sc, take_data;

  assign load = (bitcnt == 4'd9);

  // Choice of the next group
  always_comb begin
    take_fastor = 1'b0;
    take_sc     = 1'b0;
    take_data   = 1'b0;
    nbyte       = K28_5;
    nk          = 1'b1;
    if (pk == PK_NONE) begin
      if (fastor_pend && !last_fastor) begin
        take_fastor = 1'b1;
        nbyte       = K28_6;
      end else if (dts) begin
        take_sc = 1'b1;
        nbyte   = K28_0;
      end else if (!empty) begin
        take_data = 1'b1;
        nbyte     = K27_7;
      end
    end else if (pos == 3'd5) begin
      nbyte = K29_7;
    end else begin
      nbyte = buf_q[2'(pos - 3'd1)];
      nk    = 1'b0;
    end
  end

  enc8b10b u_enc (
    .din    (nbyte),
    .k      (nk),
    .rd_in  (rd),
    .code   (code),
    .rd_out (rd_next),
    .kerr   (kerr)
  );

  assign en_rd = load && take_data;
  assign ack   = load && take_sc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt      <= 4'd0;
      shreg       <= 10'b0011111010;   // K28.5, RD-
      rd          <= 1'b1;             // RD after that comma
      pos         <= 3'd0;
      pk          <= PK_NONE;
      fastor_pend <= 1'b0;
      last_fastor <= 1'b0;
      for (int i = 0; i < 4; i++) buf_q[i] <= '0;
    end else begin
      if (fastor) fastor_pend <= 1'b1;
      if (load) begin
        bitcnt      <= 4'd0;
        shreg       <= code;
        rd          <= rd_next;
        last_fastor <= take_fastor;
        if (take_fastor && !fastor) fastor_pend <= 1'b0;
        if (take_sc) begin
          pk       <= PK_SC;
          pos      <= 3'd1;
          buf_q[0] <= sc_tx.cmd;
          buf_q[1] <= sc_tx.addr;
          buf_q[2] <= sc_tx.data[15:8];
          buf_q[3] <= sc_tx.data[7:0];
        end else if (take_data) begin
          pk       <= PK_DATA;
          pos      <= 3'd1;
          buf_q[0] <= data[WORD_W-1 -: 8];
          buf_q[1] <= data[WORD_W-9 -: 8];
          buf_q[2] <= data[15:8];
          buf_q[3] <= data[7:0];
        end else if (pk != PK_NONE) begin
          if (pos == 3'd5) begin
            pk  <= PK_NONE;
            pos <= 3'd0;
          end else begin
            pos <= pos + 3'd1;
          end
        end
      end else begin
        bitcnt <= bitcnt + 4'd1;
        shreg  <= {shreg[8:0], 1'b0};
      end
    end
  end

  assign tx_serial = shreg[9];

  // Only valid control characters are ever sent.
  assert property (@(posedge clk) disable iff (!rst_n) load |-> !kerr);

endmodule
