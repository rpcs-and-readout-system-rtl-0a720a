// enc8b10b: 8b/10b encoder (Widmer-Franaszek code) with running disparity.
//
// Combinational mapping of one byte (HGF EDCBA) plus a control flag to a
// 10-bit code group, given the current running disparity; the caller holds
// the running disparity in a register and feeds rd_out back as rd_in for
// the next symbol. The 5b/6b and 3b/4b sub-blocks follow the standard code
// tables, including the alternate D.x.A7 coding and the control characters
// K28.0-K28.7, K23.7, K27.7, K29.7 and K30.7.
//
// Interface: din (byte), k (1 = control character), rd_in (0 = RD-,
// 1 = RD+). code is {a,b,c,d,e,i,f,g,h,j} with a in bit 9: bit 9 goes on
// the line first. rd_out is the running disparity after this symbol.
// kerr flags a control flag on a byte that is no valid K character (the
// group is then encoded as data). No clock; zero latency.
//
// The front end encodes every transmitted word in 8b/10b; the code
// itself is the standard one.
module enc8b10b (
  input  logic [7:0] din,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out,
  output logic       kerr
);

  logic [4:0] x;      // EDCBA
  logic [2:0] y;      // HGF
  logic [5:0] c6;     // abcdei for RD-
  logic [3:0] c4;     // fghj for RD-
  logic [5:0] s6;
  logic [3:0] s4;
  logic       rd6;    // running disparity after the 6b sub-block
  logic       k28, kx7, use_a7;

  assign x = din[4:0];
  assign y = din[7:5];

  assign k28  = k && (x == 5'd28);
  assign kx7  = k && (y == 3'd7) && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);
  assign kerr = k && !(k28 || kx7);

  // 5b/6b table, codes for RD- (complemented for RD+ when unbalanced or D.7)
  always_comb begin
    unique case (x)
      5'd0:  c6 = 6'b100111;  5'd1:  c6 = 6'b011101;
      5'd2:  c6 = 6'b101101;  5'd3:  c6 = 6'b110001;
      5'd4:  c6 = 6'b110101;  5'd5:  c6 = 6'b101001;
      5'd6:  c6 = 6'b011001;  5'd7:  c6 = 6'b111000;
      5'd8:  c6 = 6'b111001;  5'd9:  c6 = 6'b100101;
      5'd10: c6 = 6'b010101;  5'd11: c6 = 6'b110100;
      5'd12: c6 = 6'b001101;  5'd13: c6 = 6'b101100;
      5'd14: c6 = 6'b011100;  5'd15: c6 = 6'b010111;
      5'd16: c6 = 6'b011011;  5'd17: c6 = 6'b100011;
      5'd18: c6 = 6'b010011;  5'd19: c6 = 6'b110010;
      5'd20: c6 = 6'b001011;  5'd21: c6 = 6'b101010;
      5'd22: c6 = 6'b011010;  5'd23: c6 = 6'b111010;
      5'd24: c6 = 6'b110011;  5'd25: c6 = 6'b100110;
      5'd26: c6 = 6'b010110;  5'd27: c6 = 6'b110110;
      5'd28: c6 = k28 ? 6'b001111 : 6'b001110;
      5'd29: c6 = 6'b101110;
      5'd30: c6 = 6'b011110;  5'd31: c6 = 6'b101011;
      default: c6 = 6'b000000;
    endcase
  end

  // Unbalanced codes (and the balanced D.7 / K28) alternate with disparity.
  always_comb begin
    logic alt6, unbal6;
    unbal6 = ($countones(c6) != 3);
    alt6   = unbal6 || (x == 5'd7);
    s6     = (alt6 && rd_in) ? ~c6 : c6;
    rd6    = unbal6 ? ~rd_in : rd_in;
  end

  // A7 replaces P7 where P7 would make a run of five equal bits.
  assign use_a7 = (!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                  ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14));

  // 3b/4b table, codes for RD- (as seen after the 6b sub-block)
  always_comb begin
    if (k28) begin
      unique case (y)
        3'd0: c4 = 4'b1011;  3'd1: c4 = 4'b0110;
        3'd2: c4 = 4'b1010;  3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;  3'd5: c4 = 4'b0101;
        3'd6: c4 = 4'b1001;  3'd7: c4 = 4'b0111;
        default: c4 = 4'b0000;
      endcase
    end else begin
      unique case (y)
        3'd0: c4 = 4'b1011;  3'd1: c4 = 4'b1001;
        3'd2: c4 = 4'b0101;  3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;  3'd5: c4 = 4'b1010;
        3'd6: c4 = 4'b0110;
        3'd7: c4 = (use_a7 || kx7) ? 4'b0111 : 4'b1110;
        default: c4 = 4'b0000;
      endcase
    end
  end

  always_comb begin
    logic alt4, unbal4;
    unbal4 = ($countones(c4) != 2);
    // K28.y always alternates; D.x.3 alternates although balanced
    alt4   = unbal4 || (y == 3'd3) || k28;
    s4     = (alt4 && rd6) ? ~c4 : c4;
    rd_out = unbal4 ? ~rd6 : rd6;
  end

  assign code = {s6, s4};

endmodule
