// tb_sc_block: self-checking test of the slow-control block.
//
// Sends write and read requests as the RX Block would (one-cycle en_sc
// with the packet), acknowledges replies as the TX Block would after a
// random delay, and checks: reset values of the configuration, each
// register write reaching cfg, the reply (command, address, register
// content), dts held until ack, the reply for an unknown address, and a
// request that arrives while a reply is pending being dropped and
// counted.
module tb_sc_block;
  import fe_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    en_sc = 0, ack = 0, dts;
  sc_pkt_t sc_rx = '0, sc_tx;
  fe_cfg_t cfg;
  logic [7:0] sc_dropped;
  int checks = 0, failures = 0;

  sc_block dut (.clk(clk), .rst_n(rst_n), .en_sc(en_sc), .sc_rx(sc_rx),
                .sc_tx(sc_tx), .dts(dts), .ack(ack), .cfg(cfg),
                .sc_dropped(sc_dropped));

  always #5 clk = ~clk;

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] want,
                           input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, want);
    end
  endtask

  task automatic request(input logic [7:0] cmd, input logic [7:0] addr,
                         input logic [15:0] data);
    @(posedge clk); #1;
    en_sc = 1; sc_rx = '{cmd: cmd, addr: addr, data: data};
    @(posedge clk); #1;
    en_sc = 0;
  endtask

  // Waits for the reply, checks it stays offered, acknowledges it.
  task automatic reply(input logic [7:0] cmd, input logic [7:0] addr,
                       input logic [15:0] data);
    int d;
    d = $urandom_range(0, 12);
    expect_eq(32'(dts), 1, "dts after request");
    repeat (d) begin
      @(posedge clk); #1;
      checks++;
      if (!dts) begin failures++; $display("FAIL dts dropped before ack"); end
    end
    expect_eq(sc_tx, {cmd, addr, data}, "reply");
    ack = 1;
    @(posedge clk); #1;
    ack = 0;
    expect_eq(32'(dts), 0, "dts after ack");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    expect_eq(cfg, CFG_RESET, "reset configuration");
    expect_eq(32'(dts), 0, "dts after reset");

    for (int i = 0; i < 30; i++) begin
      logic [15:0] v;
      logic [7:0]  a;
      fe_cfg_t     prev_cfg;
      v = 16'($urandom);
      a = 8'($urandom_range(0, 3));
      prev_cfg = cfg;
      request(SC_WRITE, a, v);
      case (a)
        REG_CH_MASK:   begin expect_eq(cfg.ch_mask, v, "mask");
                             reply(SC_WRITE, a, v); end
        REG_CONTROL:   begin expect_eq(32'(cfg.trig_mode), 32'(v[0]), "mode");
                             reply(SC_WRITE, a, {15'd0, v[0]}); end
        REG_TRIG_WIN:  begin expect_eq(cfg.trig_win, v[7:0], "window");
                             reply(SC_WRITE, a, {8'd0, v[7:0]}); end
        default:       begin expect_eq(cfg.dead_time, v[7:0], "dead time");
                             reply(SC_WRITE, a, {8'd0, v[7:0]}); end
      endcase
      // the other registers are untouched
      if (a != REG_CH_MASK)   expect_eq(cfg.ch_mask, prev_cfg.ch_mask, "mask kept");
      if (a != REG_TRIG_WIN)  expect_eq(cfg.trig_win, prev_cfg.trig_win, "window kept");
      // read back
      request(SC_READ, REG_CH_MASK, 16'h0);
      reply(SC_READ, REG_CH_MASK, cfg.ch_mask);
    end

    request(SC_WRITE, REG_TRIG_WIN, 16'h0033);
    reply(SC_WRITE, REG_TRIG_WIN, 16'h0033);
    request(SC_READ, REG_TRIG_WIN, 16'h0);
    reply(SC_READ, REG_TRIG_WIN, 16'h0033);

    // unknown address and unknown command
    request(SC_READ, 8'h42, 16'h0);
    reply(SC_READ, 8'h42, 16'hFFFF);
    request(8'h77, REG_CH_MASK, 16'h1234);
    expect_eq(cfg.ch_mask == 16'h1234, 0, "unknown command ignored");
    reply(8'h77, REG_CH_MASK, 16'hFFFF);

    // request while a reply is pending: dropped
    request(SC_WRITE, REG_DEAD_TIME, 16'h0009);
    request(SC_WRITE, REG_DEAD_TIME, 16'h0011);
    expect_eq(sc_dropped, 1, "dropped count");
    expect_eq(cfg.dead_time, 8'h09, "dropped write not applied");
    reply(SC_WRITE, REG_DEAD_TIME, 16'h0009);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
