// inter_rpu_buffer: the local buffer between two vertically adjacent RPUs
// (Fig. 1(a) of the paper). Results an upstream RPU writes to its bottom
// buffer can also be pushed here (instruction flag fwd); the downstream RPU
// pulls them into its own left or top buffers with an IMPORT block. Traffic
// between tiles thus stays on chip and the two RPUs work as a pipeline.
//
// It is a FIFO of W-bit words (first-word fall-through) with an occupancy
// count and a high-water mark, the latter for sizing transfers. Pushing when
// full is an error (asserted): the schedule must keep a transfer within DEPTH.
// The paper does not give the buffer's size or protocol; both are choices here.
module inter_rpu_buffer #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               push_data,
  output logic                       full,
  input  logic                       pop,
  output logic [W-1:0]               pop_data,
  output logic                       valid,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] high_water
);

  logic empty, af;

  sync_fifo #(.W(W), .DEPTH(DEPTH), .AF_MARGIN(1)) u_fifo (
    .clk, .rst_n,
    .wr_en(push), .wr_data(push_data),
    .rd_en(pop), .rd_data(pop_data),
    .full, .empty, .almost_full(af), .count
  );

  assign valid = !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) high_water <= '0;
    else if (count > high_water) high_water <= count;
  end

endmodule
