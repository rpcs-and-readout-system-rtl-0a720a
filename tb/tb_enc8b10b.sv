// tb_enc8b10b: self-checking test of the 8b/10b encoder.
//
// Checks published code groups of the standard code (commas, data and
// control characters, the alternate A7 coding) against the encoder for
// both running disparities, then checks properties every 8b/10b encoder
// must have over all 256 data bytes and all 12 control characters: four
// to six ones per group, the right running disparity afterwards, distinct
// groups for distinct bytes, and over a long random stream a running
// digital sum within +-3 and no run of more than five equal bits.
module tb_enc8b10b;

  logic [7:0] din;
  logic       k, rd_in;
  logic [9:0] code;
  logic       rd_out, kerr;
  int         checks = 0, failures = 0;

  enc8b10b dut (.din(din), .k(k), .rd_in(rd_in), .code(code),
                .rd_out(rd_out), .kerr(kerr));

  task automatic check(input logic [7:0] b, input logic kk, input logic r,
                       input logic [9:0] exp_code, input string name);
    din = b; k = kk; rd_in = r;
    #1;
    checks++;
    if (code !== exp_code) begin
      failures++;
      $display("FAIL %s rd=%0d: got %b expected %b", name, r, code, exp_code);
    end
  endtask

  function automatic int ones(input logic [9:0] c);
    return $countones(c);
  endfunction

  logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC,
                              8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};
  logic [9:0] seen [512];

  initial begin
    // Reference groups of the standard code, bit a first.
    check(8'hBC, 1, 0, 10'b0011111010, "K28.5");
    check(8'hBC, 1, 1, 10'b1100000101, "K28.5");
    check(8'h3C, 1, 0, 10'b0011111001, "K28.1");
    check(8'h1C, 1, 0, 10'b0011110100, "K28.0");
    check(8'h1C, 1, 1, 10'b1100001011, "K28.0");
    check(8'hFC, 1, 0, 10'b0011111000, "K28.7");
    check(8'hFB, 1, 0, 10'b1101101000, "K27.7");
    check(8'hFB, 1, 1, 10'b0010010111, "K27.7");
    check(8'hFD, 1, 0, 10'b1011101000, "K29.7");
    check(8'hF7, 1, 0, 10'b1110101000, "K23.7");
    check(8'h00, 0, 0, 10'b1001110100, "D0.0");
    check(8'h00, 0, 1, 10'b0110001011, "D0.0");
    check(8'hB5, 0, 0, 10'b1010101010, "D21.5");
    check(8'hB5, 0, 1, 10'b1010101010, "D21.5");
    check(8'h4A, 0, 0, 10'b0101010101, "D10.2");
    check(8'hF1, 0, 0, 10'b1000110111, "D17.7 A7");
    check(8'hF1, 0, 1, 10'b1000110001, "D17.7");
    check(8'hEB, 0, 1, 10'b1101001000, "D11.7 A7");
    check(8'hEB, 0, 0, 10'b1101001110, "D11.7");
    check(8'h03, 0, 0, 10'b1100011011, "D3.0");
    check(8'h03, 0, 1, 10'b1100010100, "D3.0");
    check(8'h07, 0, 0, 10'b1110001011, "D7.0");
    check(8'h07, 0, 1, 10'b0001110100, "D7.0");
    check(8'hF7, 0, 0, 10'b1110100001, "D23.7");

    // Properties over the whole code space
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 268; i++) begin
        int n, d;
        if (i < 256) begin din = 8'(i); k = 0; end
        else begin din = kchars[i-256]; k = 1; end
        rd_in = 1'(r);
        #1;
        n = ones(code);
        d = 2 * n - 10;
        checks++;
        if (kerr || !(n >= 4 && n <= 6) ||
            (r == 0 && d > 0 && rd_out != 1) || (r == 0 && d == 0 && rd_out != 0) ||
            (r == 1 && d < 0 && rd_out != 0) || (r == 1 && d == 0 && rd_out != 1) ||
            (r == 0 && d < 0) || (r == 1 && d > 0)) begin
          failures++;
          $display("FAIL disparity byte %h k=%0d rd=%0d code %b rd_out %0d", din, k, r, code, rd_out);
        end
        seen[i] = code;
      end
      checks++;
      for (int i = 0; i < 268; i++)
        for (int j = i + 1; j < 268; j++)
          if (seen[i] == seen[j]) begin
            failures++;
            $display("FAIL duplicate groups for %0d and %0d (rd=%0d)", i, j, r);
          end
    end

    // Invalid control character is flagged
    din = 8'h00; k = 1; rd_in = 0; #1;
    checks++;
    if (!kerr) begin failures++; $display("FAIL kerr not set for K0.0"); end

    // Random stream: bounded digital sum, run length <= 5
    begin
      logic r;
      int   rds, run, maxrun, minrds, maxrds;
      logic lastbit;
      r = 0; rds = -1; run = 0; maxrun = 0; minrds = 0; maxrds = 0; lastbit = 0;
      for (int n = 0; n < 20000; n++) begin
        if ($urandom_range(0, 9) == 0) begin
          din = kchars[$urandom_range(0, 11)]; k = 1;
        end else begin
          din = 8'($urandom); k = 0;
        end
        rd_in = r;
        #1;
        for (int b = 9; b >= 0; b--) begin
          rds += code[b] ? 1 : -1;
          if (n > 0 && code[b] == lastbit) run++;
          else run = 1;
          lastbit = code[b];
          if (run > maxrun) maxrun = run;
          if (rds < minrds) minrds = rds;
          if (rds > maxrds) maxrds = rds;
        end
        r = rd_out;
      end
      checks++;
      if (maxrun > 5 || minrds < -4 || maxrds > 3) begin
        failures++;
        $display("FAIL stream: max run %0d, digital sum %0d..%0d", maxrun, minrds, maxrds);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
