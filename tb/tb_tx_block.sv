// tb_tx_block: self-checking test of the TX Block.
//
// The testbench plays the Data Block (a queue of words behind empty/data/
// en_rd, and fastor pulses) and the SC Block (replies behind dts/ack). A
// receiver process samples tx_serial, finds the group boundary from the
// first K28.5 comma, decodes each group with dec8b10b and rebuilds the
// packets. Checks: every word and reply arrives intact and in order; one
// FASTOR notice (K28.6) per burst of fastor; priority FASTOR > SC reply >
// data when all three wait at the same time; back-to-back data packets
// every 60 cycles; no code or disparity errors; en_rd only when a word is
// there; data packets still flow while fastor is held high.
module tb_tx_block;
  import fe_pkg::*;

  logic              clk = 0, rst_n = 0;
  logic              fastor = 0, empty, en_rd, dts = 0, ack, tx_serial;
  logic [WORD_W-1:0] data;
  sc_pkt_t           sc_tx = '0;
  int checks = 0, failures = 0;

  logic [WORD_W-1:0] wordq[$];      // words waiting in the "FIFO"
  logic [WORD_W-1:0] expw[$];       // words expected on the line
  sc_pkt_t           exps[$];       // replies expected on the line
  int                n_fastor = 0, n_data = 0, n_sc = 0, n_acks = 0;
  string             order = "";
  int                last_data_start = -1, data_gap_ok = 0;
  int                cyc = 0;

  tx_block dut (.clk(clk), .rst_n(rst_n), .fastor(fastor), .empty(empty),
                .data(data), .en_rd(en_rd), .sc_tx(sc_tx), .dts(dts),
                .ack(ack), .tx_serial(tx_serial));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  assign empty = (wordq.size() == 0);
  assign data  = empty ? '0 : wordq[0];

  always @(posedge clk) begin
    if (rst_n && en_rd) begin
      checks++;
      if (empty) begin failures++; $display("FAIL en_rd while empty"); end
      else void'(wordq.pop_front());
    end
    if (rst_n && ack) begin
      n_acks++;
      dts <= 1'b0;
    end
  end

  // ---- line receiver ----
  logic [9:0] sr = '0;
  logic       rrd = 0, locked = 0;
  int         bitn = 0;
  logic [7:0] dbyte;
  logic       dk, cerr, derr, rd_next;
  logic [7:0] pkt[$];
  int         pkt_start;

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
        checks++;
        if (cerr || derr) begin failures++; $display("FAIL line group %b error", sr); end
        rrd = rd_next;
        if (dk && dbyte == K28_6) begin n_fastor++; order = {order, "F"}; end
        else if (dk && (dbyte == K27_7 || dbyte == K28_0)) begin
          pkt.delete(); pkt.push_back(dbyte); pkt_start = cyc;
        end else if (!dk) pkt.push_back(dbyte);
        else if (dk && dbyte == K29_7) begin
          checks++;
          if (pkt.size() != 5) begin
            failures++; $display("FAIL packet length %0d", pkt.size());
          end else if (pkt[0] == K27_7) begin
            logic [31:0] w;
            w = {pkt[1], pkt[2], pkt[3], pkt[4]};
            n_data++; order = {order, "D"};
            if (last_data_start >= 0 && pkt_start - last_data_start == 60) data_gap_ok++;
            last_data_start = pkt_start;
            if (expw.size() == 0 || expw[0] != w) begin
              failures++; $display("FAIL data packet %h", w);
            end else void'(expw.pop_front());
          end else begin
            sc_pkt_t s;
            s = '{cmd: pkt[1], addr: pkt[2], data: {pkt[3], pkt[4]}};
            n_sc++; order = {order, "S"};
            if (exps.size() == 0 || exps[0] != s) begin
              failures++; $display("FAIL SC packet %h", s);
            end else void'(exps.pop_front());
          end
          pkt.delete();
        end else if (!(dk && dbyte == K28_5)) begin
          failures++; $display("FAIL unexpected control %h", dbyte);
        end
      end
    end
  end

  task automatic push_word(input logic [WORD_W-1:0] w);
    wordq.push_back(w);
    expw.push_back(w);
  endtask

  task automatic offer_sc(input sc_pkt_t s);
    sc_tx = s; dts = 1;
    exps.push_back(s);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (!locked) begin failures++; $display("FAIL no comma after reset"); end

    // Back-to-back data: 6 words queued at once
    for (int i = 0; i < 6; i++) push_word(32'($urandom));
    repeat (400) @(posedge clk);
    checks++;
    if (n_data != 6 || data_gap_ok != 5) begin
      failures++;
      $display("FAIL back-to-back: %0d packets, %0d at 60-cycle spacing", n_data, data_gap_ok);
    end

    // Priority: all three requests raised while a data packet is on the line
    push_word(32'h11112222);
    repeat (15) @(posedge clk);
    #1;
    order = "";
    push_word(32'h33334444);
    offer_sc('{cmd: SC_READ, addr: 8'h02, data: 16'h00AB});
    fastor = 1; @(posedge clk); #1 fastor = 0;
    repeat (300) @(posedge clk);
    checks++;
    if (order != "DFSD") begin
      failures++; $display("FAIL priority order %s, expected DFSD (the packet on the line first)", order);
    end

    // Single fastor pulses each give one notice
    for (int i = 0; i < 5; i++) begin
      @(posedge clk); #1 fastor = 1;
      @(posedge clk); #1 fastor = 0;
      repeat (30) @(posedge clk);
    end
    checks++;
    if (n_fastor != 6) begin failures++; $display("FAIL %0d fastor notices, expected 6", n_fastor); end

    // fastor held high: data still goes out
    fastor = 1;
    for (int i = 0; i < 4; i++) push_word(32'($urandom));
    repeat (600) @(posedge clk);
    #1 fastor = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (expw.size() != 0 || exps.size() != 0) begin
      failures++; $display("FAIL %0d words, %0d replies not delivered", expw.size(), exps.size());
    end
    checks++;
    if (n_acks != n_sc) begin failures++; $display("FAIL %0d acks for %0d replies", n_acks, n_sc); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
