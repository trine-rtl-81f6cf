// trine_top: the TRINE accelerator, an r x c grid of reconfigurable processing
// units (RPUs) behind one host interface (Fig. 1(a) of the paper).
//
// Each RPU holds a mode-switchable PE array with its buffers, top-k engine
// and nonlinear units (trine_rpu). RPU (r, c) is index r*GRID_C + c. Between
// RPU (r, c) and RPU (r+1, c) sits an inter-RPU buffer: results of the upper
// RPU can be forwarded into it and imported by the lower one, so a producer
// and its consumer exchange tiles on chip. The host interface lets the host
// fill buffers, push instruction blocks to any RPU and read results; the
// dependency scoreboard lets blocks on different RPUs wait for each other, so
// independent kernels run concurrently while dependent ones keep their order.
// The default configuration is the paper's Alveo U50 build: 2 x 2 RPUs of
// 32 x 32 PEs, top-k up to 256.
//
// Ports: the host request/response port of host_interface, one busy bit per
// RPU, the dependency flags and event counters that show the mechanisms at
// work (mode switches, top-k back-pressure, dependency waits, top-k groups).
module trine_top
  import trine_pkg::*;
#(
  parameter int unsigned GRID_R    = 2,
  parameter int unsigned GRID_C    = 2,
  parameter int unsigned RS        = 32,
  parameter int unsigned CS        = 32,
  parameter int unsigned BUF_DEPTH = 512,
  parameter int unsigned KMAX      = 256,
  parameter int unsigned CB_DEPTH  = 256,
  parameter int unsigned SQB_DEPTH = 32,
  parameter int unsigned IRB_DEPTH = 64,
  localparam int unsigned NRPU     = GRID_R * GRID_C,
  localparam int unsigned RPU_W    = (NRPU > 1) ? $clog2(NRPU) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   h_valid,
  output logic                   h_ready,
  input  logic                   h_we,
  input  logic [RPU_W-1:0]       h_rpu,
  input  host_tgt_e              h_tgt,
  input  logic [ADDR_W-1:0]      h_addr,
  input  logic [HOST_W-1:0]      h_wdata,
  output logic                   h_rvalid,
  output logic [HOST_W-1:0]      h_rdata,
  output logic [NRPU-1:0]        rpu_busy,
  output logic [NTAGS-1:0]       flags,
  output logic [15:0]            n_mode_switch [NRPU],
  output logic [15:0]            n_tk_stall    [NRPU],
  output logic [15:0]            n_dep_wait    [NRPU],
  output logic [15:0]            n_topk_groups [NRPU],
  output logic [15:0]            n_irb_words   [NRPU]
);

  logic [NRPU-1:0]        r_valid, r_ready;
  logic                   r_we;
  host_tgt_e              r_tgt;
  logic [ADDR_W-1:0]      r_addr;
  logic [HOST_W-1:0]      r_wdata;
  logic [HOST_W-1:0]      r_rdata [NRPU];
  logic [NTAGS-1:0]       done_tags [NRPU];
  logic                   clr_valid;
  logic [NTAGS-1:0]       clr_mask;

  logic                   up_valid [NRPU];
  logic [CS*DATA_W-1:0]   up_data  [NRPU];
  logic                   up_pop   [NRPU];
  logic                   dn_push  [NRPU];
  logic [CS*DATA_W-1:0]   dn_data  [NRPU];

  host_interface #(.NRPU(NRPU)) u_host (
    .clk, .rst_n,
    .h_valid, .h_ready, .h_we, .h_rpu, .h_tgt, .h_addr, .h_wdata,
    .h_rvalid, .h_rdata,
    .r_valid, .r_we, .r_tgt, .r_addr, .r_wdata, .r_ready, .r_rdata,
    .r_busy(rpu_busy),
    .flags, .clr_valid, .clr_mask
  );

  dep_scoreboard #(.NSRC(NRPU)) u_deps (
    .clk, .rst_n,
    .set_tags(done_tags),
    .clr_valid, .clr_mask,
    .flags,
    .n_sets()
  );

  for (genvar r = 0; r < GRID_R; r++) begin : g_r
    for (genvar c = 0; c < GRID_C; c++) begin : g_c
      localparam int unsigned ID = r * GRID_C + c;
      logic done_unused;

      trine_rpu #(
        .RS(RS), .CS(CS), .BUF_DEPTH(BUF_DEPTH), .KMAX(KMAX),
        .CB_DEPTH(CB_DEPTH), .SQB_DEPTH(SQB_DEPTH)
      ) u_rpu (
        .clk, .rst_n,
        .h_valid  (r_valid[ID]),
        .h_ready  (r_ready[ID]),
        .h_we     (r_we),
        .h_tgt    (r_tgt),
        .h_addr   (r_addr),
        .h_wdata  (r_wdata),
        .h_rdata  (r_rdata[ID]),
        .flags,
        .done_tags(done_tags[ID]),
        .done     (done_unused),
        .busy     (rpu_busy[ID]),
        .up_valid (up_valid[ID]),
        .up_data  (up_data[ID]),
        .up_pop   (up_pop[ID]),
        .dn_push  (dn_push[ID]),
        .dn_data  (dn_data[ID]),
        .n_mode_switch (n_mode_switch[ID]),
        .n_tk_stall    (n_tk_stall[ID]),
        .n_dep_wait    (n_dep_wait[ID]),
        .n_pruned_words(n_topk_groups[ID])
      );

      if (r + 1 < GRID_R) begin : g_irb
        // buffer from this RPU to the one below
        localparam int unsigned DN = (r + 1) * GRID_C + c;
        logic irb_full;
        logic [$clog2(IRB_DEPTH+1)-1:0] irb_count, irb_hw;
        inter_rpu_buffer #(.W(CS*DATA_W), .DEPTH(IRB_DEPTH)) u_irb (
          .clk, .rst_n,
          .push      (dn_push[ID]),
          .push_data (dn_data[ID]),
          .full      (irb_full),
          .pop       (up_pop[DN]),
          .pop_data  (up_data[DN]),
          .valid     (up_valid[DN]),
          .count     (irb_count),
          .high_water(irb_hw)
        );
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) n_irb_words[ID] <= '0;
          else if (dn_push[ID] && !irb_full) n_irb_words[ID] <= n_irb_words[ID] + 1'b1;
        end
      end else begin : g_no_irb
        assign n_irb_words[ID] = '0;
      end

      if (r == 0) begin : g_top_row
        assign up_valid[ID] = 1'b0;
        assign up_data[ID]  = '0;
      end
    end
  end

endmodule
