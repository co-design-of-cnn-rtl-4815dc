// tag_fifo: small synchronous FIFO that carries the bookkeeping of each pixel
// (output buffer address, first-pass flag) alongside the systolic array.
//
// The array is in order and its latency depends on the layer's decomposition
// depth, so the tag of a pixel is pushed when the pixel enters the array and
// popped when its results leave.  Push and pop may happen in the same cycle.
// Overflow and underflow are protocol errors (asserted).  The FIFO is this
// design's own device; the paper does not describe how outputs find their
// buffer address.  Pop data (rd_data) is the head entry, valid while !empty.
module tag_fifo #(
  parameter int unsigned W     = 11,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wp[AW-1:0]] <= wr_data;

  assign rd_data = mem[rp[AW-1:0]];
  assign empty   = (wp == rp);
  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
