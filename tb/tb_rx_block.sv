// tb_rx_block: self-checking test of the RX Block.
//
// The testbench plays the concentrator: it encodes a list of characters
// with enc8b10b, keeps the running disparity, and shifts the groups onto
// rx_serial one bit per cycle, bit a first, after a random number of
// filler bits so that the group boundary is unknown. It checks: lock on
// the comma; one trigger and one clear pulse per fast command, each set by
// the clock edge after the one that samples the last bit of its group; slow-control packets
// delivered intact with en_sc, also with a fast command inside them; a
// packet with a corrupted group, a short packet and a packet without its
// end character dropped and counted as errors; relock after a bit slip.
module tb_rx_block;
  import fe_pkg::*;

  logic       clk = 0, rst_n = 0, rx_serial = 0;
  logic       trigger, clear, en_sc, locked;
  sc_pkt_t    sc_rx;
  logic [7:0] rx_errors;
  int checks = 0, failures = 0;

  rx_block dut (.clk(clk), .rst_n(rst_n), .rx_serial(rx_serial),
                .trigger(trigger), .clear(clear), .en_sc(en_sc), .sc_rx(sc_rx),
                .locked(locked), .rx_errors(rx_errors));

  always #5 clk = ~clk;

  // Encoder of the test transmitter
  logic [7:0] edin;
  logic       ek, erd = 0, erd_next, ekerr;
  logic [9:0] ecode;
  enc8b10b u_enc (.din(edin), .k(ek), .rd_in(erd), .code(ecode),
                  .rd_out(erd_next), .kerr(ekerr));

  int n_trig = 0, n_clear = 0, exp_trig = 0, exp_clear = 0;
  int last_group_end = -100, strobe_late = 0;
  int cyc = 0;
  sc_pkt_t exps[$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (trigger) begin
      n_trig++;
      if (cyc != last_group_end + 2) strobe_late++;
    end
    if (clear) n_clear++;
    if (en_sc) begin
      checks++;
      if (exps.size() == 0 || exps[0] != sc_rx) begin
        failures++; $display("FAIL SC packet %h", sc_rx);
      end else void'(exps.pop_front());
    end
  end

  // Send one group; flip = bit to invert (-1: none)
  task automatic send(input logic [7:0] b, input logic k, input int flip = -1);
    logic [9:0] c;
    edin = b; ek = k; #1;
    c = ecode;
    erd = erd_next;
    if (flip >= 0) c[flip] = ~c[flip];
    for (int i = 9; i >= 0; i--) begin
      rx_serial = c[i];
      @(posedge clk);
      #1;
    end
    last_group_end = cyc - 1;
  endtask

  task automatic commas(input int n);
    repeat (n) send(K28_5, 1);
  endtask

  task automatic sc_packet(input sc_pkt_t s, input bit good = 1);
    send(K28_0, 1);
    send(s.cmd, 0);
    send(s.addr, 0);
    send(s.data[15:8], 0);
    send(s.data[7:0], 0);
    send(K29_7, 1);
    if (good) exps.push_back(s);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat ($urandom_range(1, 9)) begin
      rx_serial = 1'($urandom); @(posedge clk); #1;
    end
    commas(4);
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked after commas"); end

    // fast commands
    for (int i = 0; i < 5; i++) begin
      send(K28_2, 1); exp_trig++;
      commas($urandom_range(0, 2));
      send(K28_3, 1); exp_clear++;
    end
    // slow control
    for (int i = 0; i < 10; i++) begin
      sc_pkt_t s;
      s = '{cmd: SC_WRITE, addr: 8'($urandom_range(0, 3)), data: 16'($urandom)};
      sc_packet(s);
      commas($urandom_range(0, 2));
    end
    // trigger inside an SC packet
    begin
      sc_pkt_t s;
      s = '{cmd: SC_READ, addr: 8'h01, data: 16'h0000};
      send(K28_0, 1); send(s.cmd, 0); send(s.addr, 0);
      send(K28_2, 1); exp_trig++;
      send(s.data[15:8], 0); send(s.data[7:0], 0); send(K29_7, 1);
      exps.push_back(s);
    end
    commas(2);
    repeat (3) @(posedge clk);
    checks++;
    if (rx_errors != 0) begin failures++; $display("FAIL errors on a clean line: %0d", rx_errors); end

    // corrupted group in a packet: dropped, counted
    send(K28_0, 1); send(SC_WRITE, 0); send(8'h00, 0, 3); send(8'h12, 0);
    send(8'h34, 0); send(K29_7, 1);
    commas(3);
    // short packet
    send(K28_0, 1); send(SC_WRITE, 0); send(8'h00, 0); send(K29_7, 1);
    commas(2);
    // packet not closed, new one starts
    send(K28_0, 1); send(SC_WRITE, 0); send(8'h00, 0);
    sc_packet('{cmd: SC_READ, addr: 8'h02, data: 16'h0005});
    commas(2);
    repeat (3) @(posedge clk);
    checks++;
    if (rx_errors < 3) begin failures++; $display("FAIL only %0d errors counted", rx_errors); end

    // bit slip: two extra bits, then commas, then a trigger
    rx_serial = 0; @(posedge clk); #1; @(posedge clk); #1;
    commas(3);
    send(K28_2, 1); exp_trig++;
    sc_packet('{cmd: SC_WRITE, addr: 8'h03, data: 16'h00AA});
    commas(2);
    repeat (3) @(posedge clk);

    checks++;
    if (n_trig != exp_trig || n_clear != exp_clear) begin
      failures++;
      $display("FAIL %0d triggers (exp %0d), %0d clears (exp %0d)", n_trig, exp_trig,
               n_clear, exp_clear);
    end
    checks++;
    if (strobe_late != 0) begin
      failures++; $display("FAIL trigger strobe timing off %0d times", strobe_late);
    end
    checks++;
    if (exps.size() != 0) begin failures++; $display("FAIL %0d SC packets missing", exps.size()); end

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
