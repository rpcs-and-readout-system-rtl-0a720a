// data_block: hit acquisition, forming, zero suppression, timestamping and
// buffering for the 16 channels of one front-end board.
//
// The discriminated channel signals arrive asynchronously from the two
// front-end ASICs. Each goes through a two-flop synchronizer and a
// leading-edge detector, so one pulse gives one hit however long it lasts.
// Forming then applies the user configuration: masked channels are
// dropped, and a channel that has just fired is blind for dead_time
// cycles. FASTOR is the registered OR of the formed hits and goes straight
// to the TX Block. Zero suppression: a word is stored only in a cycle with
// at least one formed hit. The word is {timestamp, hit pattern}; the
// timestamp is a free-running cycle counter. In triggerless mode every
// such word is stored; in trigger mode only those inside a window of
// trig_win cycles that opens on a trigger fast command. Words wait in a
// FIFO until the TX Block reads them (en_rd). A word that finds the FIFO
// full is lost and counted in lost_words. The clear fast command zeroes
// the timestamp, flushes the FIFO and closes the window.
//
// Interface: in_hits (async), cfg (from the SC Block), trigger and clear
// (one-cycle pulses from the RX Block), en_rd (pop, from the TX Block),
// data/empty (FIFO head, first-word fall-through), fastor.
// Timing: an edge on in_hits sampled at clock edge k reaches the forming
// register at edge k+2 (two synchronizer stages, then the edge detector
// and forming logic); fastor rises at that edge and the word is written
// into the FIFO at the next one, carrying the timestamp counted up to the
// forming edge.
//
// The sequence acquire-form-zero-suppress-timestamp-store, FASTOR, the
// trigger and clear inputs and the two modes follow the published block
// diagram and its description; the forming rules, the word format, the
// window semantics of trigger mode and the FIFO depth are this design's.
module data_block
  import fe_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_CH-1:0]   in_hits,
  input  fe_cfg_t           cfg,
  input  logic              trigger,
  input  logic              clear,
  input  logic              en_rd,
  output logic [WORD_W-1:0] data,
  output logic              empty,
  output logic              fastor,
  output logic [15:0]       lost_words
);

  logic [N_CH-1:0] sync1, sync2, sync3;
  logic [N_CH-1:0] edge_hits, formed, formed_q;
  logic [7:0]      dead_cnt [N_CH];
  logic [TS_W-1:0] ts;
  logic [7:0]      win_cnt;
  logic            win_open, store, full;

  // Synchronizer and edge detector
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1 <= '0;
      sync2 <= '0;
      sync3 <= '0;
    end else begin
      sync1 <= in_hits;
      sync2 <= sync1;
      sync3 <= sync2;
    end
  end
  assign edge_hits = sync2 & ~sync3;

  // Forming: mask and per-channel dead time
  always_comb begin
    for (int i = 0; i < N_CH; i++)
      formed[i] = edge_hits[i] && !cfg.ch_mask[i] && (dead_cnt[i] == 8'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) dead_cnt[i] <= 8'd0;
      formed_q <= '0;
      fastor   <= 1'b0;
    end else if (clear) begin
      for (int i = 0; i < N_CH; i++) dead_cnt[i] <= 8'd0;
      formed_q <= '0;
      fastor   <= 1'b0;
    end else begin
      for (int i = 0; i < N_CH; i++) begin
        if (formed[i])              dead_cnt[i] <= cfg.dead_time;
        else if (dead_cnt[i] != 0)  dead_cnt[i] <= dead_cnt[i] - 8'd1;
      end
      formed_q <= formed;
      fastor   <= |formed;
    end
  end

  // Timestamp counter and trigger window
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts      <= '0;
      win_cnt <= '0;
    end else if (clear) begin
      ts      <= '0;
      win_cnt <= '0;
    end else begin
      ts <= ts + 1'b1;
      if (trigger)             win_cnt <= cfg.trig_win;
      else if (win_cnt != '0)  win_cnt <= win_cnt - 8'd1;
    end
  end
  assign win_open = (win_cnt != '0);

  // Zero suppression and mode selection
  assign store = (|formed_q) && (!cfg.trig_mode || win_open) && !clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     lost_words <= '0;
    else if (clear)                 lost_words <= '0;
    else if (store && full && lost_words != 16'hFFFF)
                                    lost_words <= lost_words + 16'd1;
  end

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .flush (clear),
    .wr_en (store),
    .wdata ({ts, formed_q}),
    .rd_en (en_rd),
    .rdata (data),
    .empty (empty),
    .full  (full)
  );

endmodule
