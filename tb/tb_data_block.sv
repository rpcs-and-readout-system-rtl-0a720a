// tb_data_block: self-checking test of the Data Block.
//
// A reference model kept in the testbench predicts each stored word from
// the pulses it drives: the edge of a pulse driven just after clock edge k
// is stored with timestamp ts(k)+3 (once, however long the pulse), where ts counts clock edges since
// reset or clear, and fastor is high in the cycle after edge k+3. A reader
// process pops the FIFO whenever it is allowed to and compares each word
// with the model's queue. Covered: zero suppression (masked-only pulses
// store nothing), channel mask, dead time (a pulse one cycle inside the
// dead time is dropped, one just outside is kept), trigger mode (a pulse
// inside the window is kept, one after it dropped), FIFO overflow with the
// lost-word count, and clear (FIFO flushed, timestamp restarted).
module tb_data_block;
  import fe_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic              clk = 0, rst_n = 0;
  logic [N_CH-1:0]   in_hits = '0;
  fe_cfg_t           cfg;
  logic              trigger = 0, clear = 0, en_rd;
  logic [WORD_W-1:0] data;
  logic              empty, fastor;
  logic [15:0]       lost_words;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [TS_W-1:0] ts_ref = '0;
  logic [WORD_W-1:0] expq[$];
  bit reader_on = 1;
  int fastor_seen = 0;

  data_block #(.FIFO_DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .in_hits(in_hits), .cfg(cfg), .trigger(trigger),
    .clear(clear), .en_rd(en_rd), .data(data), .empty(empty), .fastor(fastor),
    .lost_words(lost_words));

  always #5 clk = ~clk;

  // Timestamp model: counts edges since reset, restarts on clear.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) ts_ref <= clear ? '0 : ts_ref + 1'b1;
  end

  assign en_rd = reader_on && !empty;

  always @(posedge clk) begin
    if (rst_n && en_rd) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected word %h at cycle %0d", data, cyc);
      end else begin
        logic [WORD_W-1:0] e;
        e = expq.pop_front();
        if (data !== e) begin
          failures++;
          $display("FAIL word %h expected %h at cycle %0d", data, e, cyc);
        end
      end
    end
    if (fastor) fastor_seen++;
  end

  // Drive a one-cycle pulse on the channels in pat just after a clock edge;
  // expect=1 queues the word the model predicts.
  task automatic pulse(input logic [N_CH-1:0] pat, input bit expect_word,
                       input logic [N_CH-1:0] exp_pat);
    logic [TS_W-1:0] t;
    @(posedge clk); #1;
    t = ts_ref;
    in_hits = pat;
    if (expect_word) expq.push_back({TS_W'(t + 3), exp_pat});
    @(posedge clk); #1;
    in_hits = '0;
    // fastor is high in the cycle after edge k+3
    @(posedge clk); @(posedge clk); #1;
    checks++;
    if (fastor !== (exp_pat != '0)) begin
      failures++;
      $display("FAIL fastor=%0d for pattern %h", fastor, exp_pat);
    end
  endtask

  task automatic idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic drain_check(input string what);
    idle(DEPTH + 10);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %s: %0d expected words never came out", what, expq.size());
      expq.delete();
    end
  endtask

  initial begin
    cfg = CFG_RESET;
    cfg.dead_time = 8'd0;
    idle(3); #1 rst_n = 1;
    idle(3);

    // Triggerless: random patterns, some masked channels
    cfg.ch_mask = 16'h8001;
    for (int i = 0; i < 40; i++) begin
      logic [N_CH-1:0] p;
      p = (i % 5 == 0) ? 16'h8001 : N_CH'($urandom);
      pulse(p, (p & ~cfg.ch_mask) != 0, p & ~cfg.ch_mask);
      idle($urandom_range(1, 6));
    end
    drain_check("triggerless");
    cfg.ch_mask = '0;

    // Long pulses: a level held for 6 cycles is one hit
    for (int i = 0; i < 4; i++) begin
      logic [TS_W-1:0] t0;
      logic [N_CH-1:0] p;
      p = N_CH'($urandom) | 16'h0010;
      @(posedge clk); #1; t0 = ts_ref; in_hits = p;
      expq.push_back({TS_W'(t0 + 3), p});
      repeat (6) @(posedge clk);
      #1 in_hits = '0;
      idle(4);
    end
    drain_check("long pulses");

    // Dead time of 5 cycles: pulse again 5 edges later (dropped),
    // then 6 edges after the last accepted one (kept).
    cfg.dead_time = 8'd5;
    idle(10);
    begin
      logic [TS_W-1:0] t0;
      @(posedge clk); #1; t0 = ts_ref; in_hits = 16'h0004;
      expq.push_back({TS_W'(t0 + 3), 16'h0004});
      @(posedge clk); #1; in_hits = '0;
      repeat (4) @(posedge clk);
      #1; in_hits = 16'h0004;                   // 5 edges after t0: dead
      @(posedge clk); #1; in_hits = '0;
      repeat (10) @(posedge clk);
      #1; t0 = ts_ref; in_hits = 16'h0004;      // accepted again
      expq.push_back({TS_W'(t0 + 3), 16'h0004});
      @(posedge clk); #1; in_hits = '0;
      repeat (5) @(posedge clk);
      #1; t0 = ts_ref; in_hits = 16'h0004;      // 6 edges later: alive
      expq.push_back({TS_W'(t0 + 3), 16'h0004});
      @(posedge clk); #1; in_hits = '0;
    end
    drain_check("dead time");
    cfg.dead_time = 8'd0;

    // Trigger mode, window 20 cycles
    cfg.trig_mode = 1'b1;
    cfg.trig_win  = 8'd20;
    idle(5);
    pulse(16'h0100, 0, 16'h0100);              // no trigger yet: dropped
    @(posedge clk); #1 trigger = 1;
    @(posedge clk); #1 trigger = 0;
    pulse(16'h0300, 1, 16'h0300);              // inside window
    idle(30);
    pulse(16'h0030, 0, 16'h0030);              // after window: dropped
    drain_check("trigger mode");
    cfg.trig_mode = 1'b0;

    // Overflow: reader stopped, DEPTH+5 words offered
    reader_on = 0;
    idle(2);
    for (int i = 0; i < DEPTH + 5; i++) begin
      logic [N_CH-1:0] p;
      p = N_CH'(i + 1);
      pulse(p, i < DEPTH, p);
    end
    idle(4);
    checks++;
    if (lost_words != 16'd5) begin
      failures++;
      $display("FAIL lost_words=%0d expected 5", lost_words);
    end
    reader_on = 1;
    drain_check("overflow");

    // Clear: store a word, clear before reading, check flush and timestamp
    reader_on = 0;
    pulse(16'h1111, 0, 16'h1111);
    idle(2);
    checks++;
    if (empty) begin failures++; $display("FAIL word not stored before clear"); end
    @(posedge clk); #1 clear = 1;
    @(posedge clk); #1 clear = 0;
    checks++;
    if (!empty || lost_words != 0) begin
      failures++;
      $display("FAIL clear: empty=%0d lost=%0d", empty, lost_words);
    end
    reader_on = 1;
    pulse(16'h2222, 1, 16'h2222);
    drain_check("after clear");

    checks++;
    if (fastor_seen == 0) begin failures++; $display("FAIL fastor never seen"); end

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
