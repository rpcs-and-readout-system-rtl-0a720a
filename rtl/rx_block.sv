// rx_block: deserializer, 8b/10b decoder and command identification of
// the concentrator-to-front-end link.
//
// The line brings one bit per clock cycle, bit a of each 10-bit group
// first. A 10-bit shift register holds the last ten bits; when it holds a
// K28.5 comma (either disparity) the group boundary is taken from it and
// the block is locked. Every tenth cycle after that the group is decoded
// by dec8b10b with the running disparity kept here. A comma seen at
// another bit position moves the boundary there. Decoded groups are sorted
// into:
//   - fast commands, single control characters acted on at once, even in
//     the middle of a slow-control packet: K28.2 = trigger, K28.3 = clear;
//     each gives a one-cycle pulse to the Data Block;
//   - slow-control packets: K28.0, cmd, addr, data[15:8], data[7:0],
//     K29.7. On the closing K29.7 the packet goes to the SC Block on sc_rx
//     with a one-cycle en_sc strobe;
//   - K28.5 commas, which carry nothing.
// A code or disparity error, an unexpected control character or a packet
// of the wrong length drops the packet being received and is counted in
// rx_errors.
//
// Interface: rx_serial (line, synchronous to clk), trigger, clear,
// en_sc/sc_rx, locked, rx_errors. Timing: a strobe is set by the clock
// edge that follows the edge sampling the last bit of its group.
//
// That the RX Block decodes and identifies received data, executes fast
// commands such as the trigger, passes slow-control packets to the SC
// Block and clears the Data Block follows the published block diagram and
// its description; the character assignments, packet format, alignment
// method and error handling are this design's choices.
module rx_block
  import fe_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_serial,
  output logic       trigger,
  output logic       clear,
  output logic       en_sc,
  output sc_pkt_t    sc_rx,
  output logic       locked,
  output logic [7:0] rx_errors
);

  logic [9:0] sr;
  logic [3:0] cnt;
  logic       rd;
  logic       is_comma, sym;
  logic [7:0] dbyte;
  logic       dk, cerr, derr, rd_next;
  logic       in_pkt;
  logic [2:0] idx;
  logic [7:0] buf_q [4];
  logic       err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[8:0], rx_serial};
  end

  assign is_comma = (sr == 10'b0011111010) || (sr == 10'b1100000101);
  assign sym      = is_comma || (locked && cnt == 4'd0);

  dec8b10b u_dec (
    .code     (sr),
    .rd_in    (rd),
    .dout     (dbyte),
    .k        (dk),
    .code_err (cerr),
    .disp_err (derr),
    .rd_out   (rd_next)
  );

  // A comma sets the running disparity by itself; elsewhere it is checked.
  assign err = sym && !is_comma && (cerr || derr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      cnt       <= 4'd0;
      rd        <= 1'b0;
      in_pkt    <= 1'b0;
      idx       <= 3'd0;
      trigger   <= 1'b0;
      clear     <= 1'b0;
      en_sc     <= 1'b0;
      sc_rx     <= '0;
      rx_errors <= '0;
      for (int i = 0; i < 4; i++) buf_q[i] <= '0;
    end else begin
      trigger <= 1'b0;
      clear   <= 1'b0;
      en_sc   <= 1'b0;
      if (is_comma) begin
        locked <= 1'b1;
        cnt    <= 4'd1;
        rd     <= (sr == 10'b0011111010);
      end else if (locked) begin
        cnt <= (cnt == 4'd9) ? 4'd0 : cnt + 4'd1;
        if (sym) rd <= rd_next;
      end
      if (sym && locked && !is_comma) begin
        if (err) begin
          in_pkt <= 1'b0;
          if (rx_errors != 8'hFF) rx_errors <= rx_errors + 8'd1;
        end else if (dk) begin
          unique case (dbyte)
            K28_2: trigger <= 1'b1;
            K28_3: clear   <= 1'b1;
            K28_5: ;
            K28_0: begin
              if (in_pkt && rx_errors != 8'hFF) rx_errors <= rx_errors + 8'd1;
              in_pkt <= 1'b1;
              idx    <= 3'd0;
            end
            K29_7: begin
              if (in_pkt && idx == 3'd4) begin
                en_sc <= 1'b1;
                sc_rx <= '{cmd: buf_q[0], addr: buf_q[1],
                           data: {buf_q[2], buf_q[3]}};
              end else if (rx_errors != 8'hFF) begin
                rx_errors <= rx_errors + 8'd1;
              end
              in_pkt <= 1'b0;
            end
            default: begin
              if (in_pkt && rx_errors != 8'hFF) rx_errors <= rx_errors + 8'd1;
              in_pkt <= 1'b0;
            end
          endcase
        end else if (in_pkt) begin
          if (idx == 3'd4) begin
            in_pkt <= 1'b0;
            if (rx_errors != 8'hFF) rx_errors <= rx_errors + 8'd1;
          end else begin
            buf_q[idx[1:0]] <= dbyte;
            idx <= idx + 3'd1;
          end
        end
      end
    end
  end

endmodule
