// sync_fifo: single-clock first-word-fall-through FIFO.
//
// A memory array with write and read pointers one bit wider than the
// address, so full and empty are told apart by the extra bit. rdata shows
// the oldest word whenever empty is low; rd_en pops it. A write while full
// is dropped (the caller counts it); a read while empty is ignored.
// flush empties the FIFO in one cycle. Used as the hit buffer of the Data
// Block, which stores hits "till transmission"; its depth is this design's
// choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64        // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             do_wr, do_rd;

  assign empty = (wptr == rptr);
  assign full  = (wptr[AW-1:0] == rptr[AW-1:0]) && (wptr[AW] != rptr[AW]);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rdata = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else if (flush) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

endmodule
