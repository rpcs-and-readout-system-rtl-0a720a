// tb_dec8b10b: self-checking test of the 8b/10b decoder.
//
// Decodes published code groups of the standard code, then every data
// byte and every control character as produced by enc8b10b under both
// running disparities, checking byte, control flag, running disparity
// afterwards and the absence of error flags. Finally feeds groups that
// are not in the code (all zeros, all ones, forbidden 6b and 4b parts)
// and groups with the wrong disparity, and checks the error flags.
module tb_dec8b10b;

  logic [9:0] code, ecode;
  logic       rd_in, erd_in, erd_out, ekerr;
  logic [7:0] dout, edin;
  logic       k, ek, code_err, disp_err, rd_out;
  int         checks = 0, failures = 0;

  dec8b10b dut (.code(code), .rd_in(rd_in), .dout(dout), .k(k),
                .code_err(code_err), .disp_err(disp_err), .rd_out(rd_out));
  enc8b10b u_enc (.din(edin), .k(ek), .rd_in(erd_in), .code(ecode),
                  .rd_out(erd_out), .kerr(ekerr));

  logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC,
                              8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};

  task automatic known(input logic [9:0] c, input logic r, input logic [7:0] b,
                       input logic kk);
    code = c; rd_in = r; #1;
    checks++;
    if (dout !== b || k !== kk || code_err || disp_err) begin
      failures++;
      $display("FAIL %b rd=%0d: got %h k=%0d err=%0d/%0d, expected %h k=%0d",
               c, r, dout, k, code_err, disp_err, b, kk);
    end
  endtask

  task automatic bad(input logic [9:0] c, input logic r, input bit want_code,
                     input bit want_disp);
    code = c; rd_in = r; #1;
    checks++;
    if ((want_code && !code_err) || (want_disp && !disp_err)) begin
      failures++;
      $display("FAIL %b rd=%0d not flagged (code_err=%0d disp_err=%0d)", c, r,
               code_err, disp_err);
    end
  endtask

  initial begin
    known(10'b0011111010, 0, 8'hBC, 1);
    known(10'b1100000101, 1, 8'hBC, 1);
    known(10'b0011111001, 0, 8'h3C, 1);
    known(10'b1100000110, 1, 8'h3C, 1);
    known(10'b0011110100, 0, 8'h1C, 1);
    known(10'b1101101000, 0, 8'hFB, 1);
    known(10'b1011101000, 0, 8'hFD, 1);
    known(10'b1001110100, 0, 8'h00, 0);
    known(10'b1010101010, 1, 8'hB5, 0);
    known(10'b1000110111, 0, 8'hF1, 0);
    known(10'b1101001000, 1, 8'hEB, 0);
    known(10'b1110100001, 0, 8'hF7, 0);

    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 268; i++) begin
        if (i < 256) begin edin = 8'(i); ek = 0; end
        else begin edin = kchars[i-256]; ek = 1; end
        erd_in = 1'(r);
        #1;
        code = ecode; rd_in = 1'(r);
        #1;
        checks++;
        if (dout !== edin || k !== ek || code_err || disp_err || rd_out !== erd_out) begin
          failures++;
          $display("FAIL round trip %h k=%0d rd=%0d: got %h k=%0d err=%0d/%0d rd=%0d",
                   edin, ek, r, dout, k, code_err, disp_err, rd_out);
        end
      end
    end

    bad(10'b0000000000, 0, 1, 0);
    bad(10'b1111111111, 1, 1, 0);
    bad(10'b1111000101, 0, 1, 0);   // 6b part 111100 is not in the code
    bad(10'b1001111111, 0, 1, 0);   // 4b part 1111 is not in the code
    bad(10'b0011111010, 1, 0, 1);   // K28.5 RD- sent while RD+
    bad(10'b1001110100, 1, 0, 1);   // D0.0 RD- while RD+

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
