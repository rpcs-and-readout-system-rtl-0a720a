// dec8b10b: 8b/10b decoder (Widmer-Franaszek code) with error flags.
//
// Combinational inverse of enc8b10b. The 6-bit sub-block abcdei maps to
// EDCBA through the inverse of the 5b/6b table (both disparities); the
// 4-bit sub-block fghj maps to HGF through the inverse 3b/4b table. After
// the K28 prefix 110000 the 4-bit part is complemented first, which folds
// the control-character column onto the data column. A group is a
// control character when its 6b part is K28's, or when it is one of
// K23.7/K27.7/K29.7/K30.7 (x.7 with the alternate 0111/1000 sub-block,
// which data bytes with those x never use).
//
// Interface: code is {a,b,c,d,e,i,f,g,h,j}, a in bit 9 (first on the line);
// rd_in is the running disparity before this group (0 = RD-, 1 = RD+).
// dout/k give the decoded byte and control flag; code_err flags a group
// not in the tables; disp_err flags a sub-block whose disparity is not
// allowed under rd_in. rd_out is the running disparity after the group.
// No clock; zero latency.
module dec8b10b (
  input  logic [9:0] code,
  input  logic       rd_in,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err,
  output logic       disp_err,
  output logic       rd_out
);

  logic [5:0] s6;
  logic [3:0] s4, t4;
  logic [4:0] x;
  logic [2:0] y;
  logic       bad6, bad4, k28, kx7;
  logic       rd6;
  int         ones6, ones4;

  assign s6 = code[9:4];
  assign s4 = code[3:0];

  always_comb begin
    bad6 = 1'b0;
    unique case (s6)
      6'b100111, 6'b011000: x = 5'd0;
      6'b011101, 6'b100010: x = 5'd1;
      6'b101101, 6'b010010: x = 5'd2;
      6'b110001:            x = 5'd3;
      6'b110101, 6'b001010: x = 5'd4;
      6'b101001:            x = 5'd5;
      6'b011001:            x = 5'd6;
      6'b111000, 6'b000111: x = 5'd7;
      6'b111001, 6'b000110: x = 5'd8;
      6'b100101:            x = 5'd9;
      6'b010101:            x = 5'd10;
      6'b110100:            x = 5'd11;
      6'b001101:            x = 5'd12;
      6'b101100:            x = 5'd13;
      6'b011100:            x = 5'd14;
      6'b010111, 6'b101000: x = 5'd15;
      6'b011011, 6'b100100: x = 5'd16;
      6'b100011:            x = 5'd17;
      6'b010011:            x = 5'd18;
      6'b110010:            x = 5'd19;
      6'b001011:            x = 5'd20;
      6'b101010:            x = 5'd21;
      6'b011010:            x = 5'd22;
      6'b111010, 6'b000101: x = 5'd23;
      6'b110011, 6'b001100: x = 5'd24;
      6'b100110:            x = 5'd25;
      6'b010110:            x = 5'd26;
      6'b110110, 6'b001001: x = 5'd27;
      6'b001110:            x = 5'd28;
      6'b001111, 6'b110000: x = 5'd28;   // K28
      6'b101110, 6'b010001: x = 5'd29;
      6'b011110, 6'b100001: x = 5'd30;
      6'b101011, 6'b010100: x = 5'd31;
      default: begin x = 5'd0; bad6 = 1'b1; end
    endcase
  end

  assign k28 = (s6 == 6'b001111) || (s6 == 6'b110000);
  assign t4  = (s6 == 6'b110000) ? ~s4 : s4;

  always_comb begin
    bad4 = 1'b0;
    unique case (t4)
      4'b1011, 4'b0100:                   y = 3'd0;
      4'b1001:                            y = 3'd1;
      4'b0101:                            y = 3'd2;
      4'b1100, 4'b0011:                   y = 3'd3;
      4'b1101, 4'b0010:                   y = 3'd4;
      4'b1010:                            y = 3'd5;
      4'b0110:                            y = 3'd6;
      4'b1110, 4'b0001, 4'b0111, 4'b1000: y = 3'd7;
      default: begin y = 3'd0; bad4 = 1'b1; end
    endcase
  end

  assign kx7 = (s4 == 4'b0111 || s4 == 4'b1000) &&
               (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30) && !bad6;

  assign dout = {y, x};
  assign k    = k28 || kx7;

  // Running disparity: an unbalanced sub-block must oppose the current RD
  // and flips it.
  always_comb begin
    ones6    = $countones(s6);
    ones4    = $countones(s4);
    disp_err = 1'b0;
    rd6      = rd_in;
    if (ones6 > 3) begin
      if (rd_in) disp_err = 1'b1;
      rd6 = 1'b1;
    end else if (ones6 < 3) begin
      if (!rd_in) disp_err = 1'b1;
      rd6 = 1'b0;
    end
    rd_out = rd6;
    if (ones4 > 2) begin
      if (rd6) disp_err = 1'b1;
      rd_out = 1'b1;
    end else if (ones4 < 2) begin
      if (!rd6) disp_err = 1'b1;
      rd_out = 1'b0;
    end
  end

  assign code_err = bad6 || bad4;

endmodule
