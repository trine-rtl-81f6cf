// host_interface: the accelerator's port to the host processor (APU/CPU).
//
// In the paper the host writes compact control blocks (mode, tiling, routing
// masks) and moves bulk data by AXI DMA; the host interface of Fig. 1(a)
// reaches every RPU and its buffers. This module is that fan-out on a plain
// request/response port (the AXI and DMA shell is left to the platform):
//   request  h_valid/h_ready, h_we, h_rpu (which RPU), h_tgt (host_tgt_e),
//            h_addr (word address in the target), h_wdata
//   response h_rvalid/h_rdata, one cycle after an accepted read.
// Writes to LB, TB0, TB1, PARAM, SQB and INSTR go to the addressed RPU; a read
// of BB returns one result word; HT_CTRL writes clear dependency flags
// (mask in h_wdata) and HT_CTRL reads return {flags, RPU busy bits}.
// A request waits (h_ready low) while the addressed RPU cannot take it.
module host_interface
  import trine_pkg::*;
#(
  parameter int unsigned NRPU = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host side
  input  logic                   h_valid,
  output logic                   h_ready,
  input  logic                   h_we,
  input  logic [$clog2(NRPU > 1 ? NRPU : 2)-1:0] h_rpu,
  input  host_tgt_e              h_tgt,
  input  logic [ADDR_W-1:0]      h_addr,
  input  logic [HOST_W-1:0]      h_wdata,
  output logic                   h_rvalid,
  output logic [HOST_W-1:0]      h_rdata,
  // RPU side
  output logic [NRPU-1:0]        r_valid,
  output logic                   r_we,
  output host_tgt_e              r_tgt,
  output logic [ADDR_W-1:0]      r_addr,
  output logic [HOST_W-1:0]      r_wdata,
  input  logic [NRPU-1:0]        r_ready,
  input  logic [HOST_W-1:0]      r_rdata [NRPU],
  input  logic [NRPU-1:0]        r_busy,
  // dependency flags
  input  logic [NTAGS-1:0]       flags,
  output logic                   clr_valid,
  output logic [NTAGS-1:0]       clr_mask
);

  logic        is_ctrl;
  logic        rd_pend;
  logic        rd_ctrl;
  logic [$clog2(NRPU > 1 ? NRPU : 2)-1:0] rd_rpu;

  assign is_ctrl = (h_tgt == HT_CTRL);

  always_comb begin
    r_valid = '0;
    if (h_valid && !is_ctrl) r_valid[h_rpu] = 1'b1;
    h_ready = is_ctrl ? 1'b1 : r_ready[h_rpu];
  end

  assign r_we      = h_we;
  assign r_tgt     = h_tgt;
  assign r_addr    = h_addr;
  assign r_wdata   = h_wdata;
  assign clr_valid = h_valid && is_ctrl && h_we;
  assign clr_mask  = h_wdata[NTAGS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0;
      rd_ctrl <= 1'b0;
      rd_rpu  <= '0;
    end else begin
      rd_pend <= h_valid && h_ready && !h_we;
      rd_ctrl <= is_ctrl;
      rd_rpu  <= h_rpu;
    end
  end

  assign h_rvalid = rd_pend;
  always_comb begin
    h_rdata = '0;
    if (rd_ctrl) h_rdata[NTAGS+NRPU-1:0] = {flags, r_busy};
    else         h_rdata = r_rdata[rd_rpu];
  end

  a_known_rpu: assert property (@(posedge clk) disable iff (!rst_n)
                                h_valid |-> (int'(h_rpu) < NRPU));

endmodule
