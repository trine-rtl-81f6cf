// sync_fifo: single-clock first-in first-out buffer, memory held in an array
// (maps to block RAM). Used for the center buffer and the inter-RPU buffers.
//
// Interface: push when wr_en && !full, pop when rd_en && !empty; rd_data shows
// the head word combinationally (first-word fall-through). count is the
// occupancy; almost_full rises when fewer than AF_MARGIN entries are free.
// Any DEPTH works: the pointers wrap at DEPTH - 1.
// Writing while full or reading while empty is a protocol error (asserted).
module sync_fifo #(
  parameter int unsigned W         = 32,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned AF_MARGIN = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       full,
  output logic                       empty,
  output logic                       almost_full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full        = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty       = (count == '0);
  assign almost_full = (int'(count) + int'(AF_MARGIN) > int'(DEPTH));
  assign rd_data     = mem[rp];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en && !full)  wp <= (int'(wp) == int'(DEPTH) - 1) ? '0 : wp + 1'b1;
      if (rd_en && !empty) rp <= (int'(rp) == int'(DEPTH) - 1) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(wr_en && !full) - $bits(count)'(rd_en && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
