// tb_fe_fpga: end-to-end test of the front-end FPGA at its default size.
//
// The testbench plays both ends of the board. On the detector side it
// drives pulses on the 16 channel inputs. On the link side it plays the
// concentrator: a transmitter encodes fast commands and slow-control
// requests with enc8b10b and sends them on rx_serial (commas in between),
// and a receiver aligns on the comma of tx_serial, decodes with dec8b10b
// and rebuilds data packets, slow-control replies and FASTOR notices.
//
// Scenario: configure through slow control (mask, dead time) and read a
// register back; triggerless acquisition with masked channels (zero
// suppression: a pulse on masked channels only gives no word); dead time;
// FASTOR notices; a slow-control reply overtaking queued data words
// (priority); clear (timestamps restart); trigger mode with a window
// opened by a trigger command; buffer overflow under a hit burst faster
// than the link, where every offered word must be either received, in
// order, or counted as lost. Each mechanism is counted and must occur.
// Every received data word is compared with the pulse that made it:
// the hit pattern exactly, the timestamp through the spacing between
// consecutive pulses.
module tb_fe_fpga;
  import fe_pkg::*;

  logic            clk = 0, rst_n = 0;
  logic [N_CH-1:0] in_hits = '0;
  logic            rx_serial = 0, tx_serial, rx_locked;
  logic [15:0]     lost_words;
  logic [7:0]      rx_errors, sc_dropped;
  int checks = 0, failures = 0;
  int cyc = 0;

  fe_fpga dut (.clk(clk), .rst_n(rst_n), .in_hits(in_hits),
               .rx_serial(rx_serial), .tx_serial(tx_serial),
               .lost_words(lost_words), .rx_locked(rx_locked),
               .rx_errors(rx_errors), .sc_dropped(sc_dropped));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters ----------------
  int m_sc_write = 0, m_sc_read = 0, m_words = 0, m_suppressed = 0;
  int m_fastor = 0, m_dead = 0, m_trig_kept = 0, m_trig_dropped = 0;
  int m_clear = 0, m_overflow = 0, m_priority = 0;

  // ---------------- concentrator transmitter ----------------
  typedef struct packed { logic k; logic [7:0] b; } sym_t;
  sym_t txq[$];
  logic [7:0] edin;
  logic       ek, erd = 0, erd_next, ekerr;
  logic [9:0] ecode;
  enc8b10b u_enc (.din(edin), .k(ek), .rd_in(erd), .code(ecode),
                  .rd_out(erd_next), .kerr(ekerr));

  initial begin
    @(posedge rst_n);
    forever begin
      sym_t s;
      logic [9:0] c;
      s = (txq.size() != 0) ? txq.pop_front() : '{k: 1'b1, b: K28_5};
      edin = s.b; ek = s.k; #1;
      c = ecode;
      erd = erd_next;
      for (int i = 9; i >= 0; i--) begin
        rx_serial = c[i];
        @(posedge clk); #1;
      end
    end
  end

  task automatic send_sc(input logic [7:0] cmd, input logic [7:0] addr,
                         input logic [15:0] d);
    txq.push_back('{1'b1, K28_0});
    txq.push_back('{1'b0, cmd});
    txq.push_back('{1'b0, addr});
    txq.push_back('{1'b0, d[15:8]});
    txq.push_back('{1'b0, d[7:0]});
    txq.push_back('{1'b1, K29_7});
  endtask

  task automatic wait_tx_empty();
    while (txq.size() != 0) @(posedge clk);
    repeat (25) @(posedge clk);
  endtask

  // ---------------- concentrator receiver ----------------
  logic [9:0] sr = '0;
  logic       rrd = 0, locked = 0;
  int         bitn = 0;
  logic [7:0] dbyte;
  logic       dk, cerr, derr, rd_next;
  logic [7:0] pkt[$];
  logic [WORD_W-1:0] rxw[$];    // received data words
  sc_pkt_t           rxs[$];    // received replies

  dec8b10b u_dec (.code(sr), .rd_in(rrd), .dout(dbyte), .k(dk),
                  .code_err(cerr), .disp_err(derr), .rd_out(rd_next));

  always @(negedge clk) begin
    if (rst_n) begin
      sr = {sr[8:0], tx_serial};
      bitn++;
      if (!locked && sr == 10'b0011111010) begin
        locked = 1; bitn = 0; rrd = 1;
      end else if (locked && bitn == 10) begin
        bitn = 0;
        #0;
        if (cerr || derr) begin
          failures++; $display("FAIL line error on group %b", sr);
        end
        rrd = rd_next;
        if (dk && dbyte == K28_6) m_fastor++;
        else if (dk && (dbyte == K27_7 || dbyte == K28_0)) begin
          pkt.delete(); pkt.push_back(dbyte);
        end else if (!dk) pkt.push_back(dbyte);
        else if (dk && dbyte == K29_7 && pkt.size() == 5) begin
          if (pkt[0] == K27_7) rxw.push_back({pkt[1], pkt[2], pkt[3], pkt[4]});
          else rxs.push_back('{cmd: pkt[1], addr: pkt[2], data: {pkt[3], pkt[4]}});
          pkt.delete();
        end
      end
    end
  end

  // ---------------- detector side ----------------
  typedef struct { logic [N_CH-1:0] pat; int t; } hit_t;
  hit_t expq[$];

  task automatic pulse(input logic [N_CH-1:0] pat);
    @(posedge clk); #1 in_hits = pat;
    @(posedge clk); #1 in_hits = '0;
  endtask

  task automatic pulse_exp(input logic [N_CH-1:0] pat, input logic [N_CH-1:0] exp_pat);
    @(posedge clk); #1 in_hits = pat;
    if (exp_pat != '0) expq.push_back('{pat: exp_pat, t: cyc});
    @(posedge clk); #1 in_hits = '0;
  endtask

  // Compares the received words with the expected pulses.
  task automatic match_words(input string what);
    int  prev_t;
    logic [TS_W-1:0] prev_ts;
    bit  first;
    first = 1;
    repeat (200) begin
      if (rxw.size() >= expq.size()) break;
      repeat (60) @(posedge clk);
    end
    checks++;
    if (rxw.size() != expq.size()) begin
      failures++;
      $display("FAIL %s: %0d words received, %0d expected", what, rxw.size(), expq.size());
    end
    while (rxw.size() != 0 && expq.size() != 0) begin
      logic [WORD_W-1:0] w;
      hit_t h;
      w = rxw.pop_front();
      h = expq.pop_front();
      checks++;
      m_words++;
      if (w[N_CH-1:0] != h.pat ||
          (!first && TS_W'(w[WORD_W-1:N_CH] - prev_ts) != TS_W'(h.t - prev_t))) begin
        failures++;
        $display("FAIL %s: word %h for pattern %h", what, w, h.pat);
      end
      first = 0;
      prev_ts = w[WORD_W-1:N_CH];
      prev_t = h.t;
    end
    rxw.delete(); expq.delete();
  endtask

  task automatic expect_reply(input sc_pkt_t s);
    repeat (400) begin
      if (rxs.size() != 0) break;
      @(posedge clk);
    end
    checks++;
    if (rxs.size() == 0 || rxs[0] != s) begin
      failures++;
      $display("FAIL reply %h, expected %h", rxs.size() ? rxs[0] : '0, s);
    end
    if (rxs.size()) void'(rxs.pop_front());
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-32s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (60) @(posedge clk);
    checks++;
    if (!locked || !rx_locked) begin failures++; $display("FAIL links not locked"); end

    // ---- configuration by slow control ----
    send_sc(SC_WRITE, REG_CH_MASK, 16'h00F0);
    expect_reply('{cmd: SC_WRITE, addr: REG_CH_MASK, data: 16'h00F0}); m_sc_write++;
    send_sc(SC_WRITE, REG_DEAD_TIME, 16'h0000);
    expect_reply('{cmd: SC_WRITE, addr: REG_DEAD_TIME, data: 16'h0000}); m_sc_write++;
    send_sc(SC_READ, REG_CH_MASK, 16'h0000);
    expect_reply('{cmd: SC_READ, addr: REG_CH_MASK, data: 16'h00F0}); m_sc_read++;

    // ---- triggerless acquisition, zero suppression ----
    begin
      int f0;
      f0 = m_fastor;
      for (int i = 0; i < 30; i++) begin
        logic [N_CH-1:0] p;
        p = (i % 4 == 3) ? 16'h0030 : N_CH'($urandom) | 16'h0001;
        if ((p & 16'hFF0F) == 0) m_suppressed++;
        pulse_exp(p, p & 16'hFF0F);
        repeat ($urandom_range(60, 120)) @(posedge clk);
      end
      match_words("triggerless");
      checks++;
      if (m_fastor - f0 < 10) begin
        failures++; $display("FAIL only %0d FASTOR notices for 22 hits", m_fastor - f0);
      end
    end

    // ---- dead time of 8 cycles ----
    send_sc(SC_WRITE, REG_DEAD_TIME, 16'h0008);
    expect_reply('{cmd: SC_WRITE, addr: REG_DEAD_TIME, data: 16'h0008}); m_sc_write++;
    pulse_exp(16'h0001, 16'h0001);
    repeat (3) @(posedge clk);
    pulse_exp(16'h0001, 16'h0000); m_dead++;   // 5 edges after: blind
    repeat (20) @(posedge clk);
    pulse_exp(16'h0001, 16'h0001);
    match_words("dead time");
    send_sc(SC_WRITE, REG_DEAD_TIME, 16'h0000);
    expect_reply('{cmd: SC_WRITE, addr: REG_DEAD_TIME, data: 16'h0000});

    // ---- priority: a reply overtakes queued data ----
    for (int i = 0; i < 8; i++) begin
      pulse_exp(16'h0100 << (i % 8), 16'h0100 << (i % 8));
      @(posedge clk);
    end
    send_sc(SC_READ, REG_TRIG_WIN, 16'h0000);
    wait (rxs.size() != 0);
    if (rxw.size() < 8) m_priority++;
    expect_reply('{cmd: SC_READ, addr: REG_TRIG_WIN, data: 16'd16}); m_sc_read++;
    match_words("priority");

    // ---- clear: timestamps restart ----
    repeat (2000) @(posedge clk);
    pulse_exp(16'h0002, 16'h0002);
    match_words("before clear");
    txq.push_back('{1'b1, K28_3});
    wait_tx_empty();
    begin
      int t0;
      t0 = cyc;
      pulse_exp(16'h0004, 16'h0004);
      repeat (200) @(posedge clk);
      checks++;
      if (rxw.size() != 1 || int'(rxw[0][WORD_W-1:N_CH]) > cyc - t0 + 40) begin
        failures++; $display("FAIL timestamp did not restart after clear");
      end else m_clear++;
      rxw.delete(); expq.delete();
    end

    // ---- trigger mode, window 20 ----
    send_sc(SC_WRITE, REG_TRIG_WIN, 16'd20);
    expect_reply('{cmd: SC_WRITE, addr: REG_TRIG_WIN, data: 16'd20});
    send_sc(SC_WRITE, REG_CONTROL, 16'h0001);
    expect_reply('{cmd: SC_WRITE, addr: REG_CONTROL, data: 16'h0001}); m_sc_write++;
    pulse_exp(16'h0800, 16'h0000); m_trig_dropped++;   // no trigger yet
    repeat (100) @(posedge clk);
    checks++;
    if (rxw.size() != 0) begin failures++; $display("FAIL word stored without trigger"); end
    txq.push_back('{1'b1, K28_2});
    // the trigger takes effect two edges after its last bit is sampled
    while (txq.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    pulse_exp(16'h0600, 16'h0600); m_trig_kept++;
    repeat (40) @(posedge clk);
    pulse_exp(16'h0200, 16'h0000); m_trig_dropped++;   // window closed
    match_words("trigger mode");
    send_sc(SC_WRITE, REG_CONTROL, 16'h0000);
    expect_reply('{cmd: SC_WRITE, addr: REG_CONTROL, data: 16'h0000});

    // ---- overflow: 200 hits 4 cycles apart, link drains one per 60 ----
    begin
      int offered, got, idx;
      bit inorder;
      send_sc(SC_WRITE, REG_CH_MASK, 16'h0000);
      expect_reply('{cmd: SC_WRITE, addr: REG_CH_MASK, data: 16'h0000});
      rxw.delete();
      offered = 200;
      for (int i = 0; i < offered; i++) begin
        pulse(N_CH'(i + 1));
        repeat (2) @(posedge clk);
      end
      repeat (100 * 60) @(posedge clk);
      got = rxw.size();
      idx = 0; inorder = 1;
      foreach (rxw[j]) begin
        int v;
        v = int'(rxw[j][N_CH-1:0]);
        if (v <= idx) inorder = 0;
        idx = v;
      end
      checks++;
      if (got + int'(lost_words) != offered || !inorder || lost_words == 0) begin
        failures++;
        $display("FAIL overflow: %0d received + %0d lost != %0d (in order %0d)",
                 got, lost_words, offered, inorder);
      end else m_overflow++;
      $display("  overflow: %0d words received, %0d lost", got, lost_words);
      rxw.delete();
    end

    checks++;
    if (rx_errors != 0 || sc_dropped != 0) begin
      failures++; $display("FAIL rx_errors=%0d sc_dropped=%0d", rx_errors, sc_dropped);
    end

    $display("mechanisms seen:");
    need(m_sc_write, "slow-control writes");
    need(m_sc_read, "slow-control reads");
    need(m_words, "data words checked");
    need(m_suppressed, "zero-suppressed pulses");
    need(m_fastor, "FASTOR notices");
    need(m_dead, "pulses inside dead time");
    need(m_priority, "reply ahead of queued data");
    need(m_clear, "clear commands");
    need(m_trig_kept, "hits kept in trigger window");
    need(m_trig_dropped, "hits dropped in trigger mode");
    need(m_overflow, "buffer overflows");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
