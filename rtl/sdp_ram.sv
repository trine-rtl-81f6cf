// sdp_ram: simple dual-port RAM, one write port and one read port with a
// registered read (one cycle latency), the behaviour of an FPGA block RAM.
// Used for the left, top, bottom buffers and the norm parameter store.
module sdp_ram #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
