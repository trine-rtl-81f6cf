// trine_rpu: one reconfigurable processing unit (Fig. 1(b) of the paper,
// "fully loaded": with top-k engine and nonlinear units).
//
// Datapath, in the order data flows:
//   left buffer LB (RS int8 lanes per word) and top buffers TB0/TB1 (CS int8
//   lanes; the paper's "TB x 2") -> feed schedulers (left and top skews for the
//   systolic modes, SQB indexed reads for the sparse modes) -> mode-switchable
//   engine (RS x CS PEs) -> bottom feed scheduler (output deskew, WS) ->
//   top-k engine (C_S-element bitonic sorter, center buffer CB, C_S->k merge
//   sorter, each stage with a bypass) -> nonlinear unit (norm, activation,
//   int8 quantisation) -> bottom buffer BB, and optionally the inter-RPU buffer
//   below. Positions kept by the top-k unit go into the sparse queue buffer
//   SQB, which drives the indexed reads of later 1 x CS SIMD / RADT blocks.
// The ID/EX unit decodes instruction blocks and sequences all of it.
//
// Operand routing per mode (MSE inputs):
//   a_west  <- left skew of the LB word (OS, WS)
//   b_north <- top skew of the TB0 word (OS); raw TB0 word otherwise
//   x_col   <- TB1 word (RADT, normal SIMD)
//   x_bcast <- LB word lane a_sel (1 x CS SIMD)
// Host port (see host_interface): writes LB/TB0/TB1 (word = low bits of
// h_wdata), PARAM (addr 0: per-lane scale, addr 1: per-lane bias, 16 bits per
// lane), SQB (one pos in h_wdata[15:0]), INSTR (instr_t in the low bits);
// reads BB (one cycle latency). While an IMPORT block writes a buffer, host
// writes wait.
module trine_rpu
  import trine_pkg::*;
#(
  parameter int unsigned RS        = 32,
  parameter int unsigned CS        = 32,
  parameter int unsigned BUF_DEPTH = 512,   // words in each of LB, TB0, TB1, BB
  parameter int unsigned KMAX      = 256,
  parameter int unsigned CB_DEPTH  = 256,
  parameter int unsigned SQB_DEPTH = 32,
  parameter int unsigned IQ_DEPTH  = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host port
  input  logic                   h_valid,
  output logic                   h_ready,
  input  logic                   h_we,
  input  host_tgt_e              h_tgt,
  input  logic [ADDR_W-1:0]      h_addr,
  input  logic [HOST_W-1:0]      h_wdata,
  output logic [HOST_W-1:0]      h_rdata,
  // dependency flags
  input  logic [NTAGS-1:0]       flags,
  output logic [NTAGS-1:0]       done_tags,
  output logic                   done,
  output logic                   busy,
  // inter-RPU buffers: up (read) and down (write)
  input  logic                   up_valid,
  input  logic [CS*DATA_W-1:0]   up_data,
  output logic                   up_pop,
  output logic                   dn_push,
  output logic [CS*DATA_W-1:0]   dn_data,
  // event counters
  output logic [15:0]            n_mode_switch,
  output logic [15:0]            n_tk_stall,
  output logic [15:0]            n_dep_wait,
  output logic [15:0]            n_pruned_words
);

  localparam int unsigned BAW = $clog2(BUF_DEPTH);
  localparam int unsigned LG  = (CS > 1) ? $clog2(CS) : 1;

  // ---------------- control ----------------
  instr_t            cfg;
  logic              active, start;
  logic              lb_re, tb0_re, tb1_re;
  logic [ADDR_W-1:0] lb_raddr, tb0_raddr, tb1_raddr;
  logic              sqb_valid, sqb_pop, sqb_restart, sqb_new_row, sqb_wr_ready;
  pos_t              sqb_pos;
  logic [ADDR_W-1:0] sqb_a_addr, sqb_b_addr;
  logic [ROW_W-1:0]  sqb_a_sel;
  logic [ADDR_W-1:0] imp_waddr;
  logic              rd_valid, mse_compute, mse_load_w, mse_drain, mse_shift, mse_clr;
  logic [ROW_W-1:0]  mse_xsel;
  logic              o_valid, o_first, o_last;
  logic [ROW_W-1:0]  o_row;
  logic [COLI_W-1:0] o_col;
  logic              tk_ready, tk_busy, nl_busy;
  logic              iq_ready;
  logic              imp_we;

  idex_unit #(.RS(RS), .CS(CS), .IQ_DEPTH(IQ_DEPTH)) u_idex (
    .clk, .rst_n,
    .iq_push   (h_valid && h_we && h_tgt == HT_INSTR),
    .iq_data   (instr_t'(h_wdata[$bits(instr_t)-1:0])),
    .iq_ready,
    .flags, .done, .done_tags,
    .cfg, .active, .start,
    .lb_re, .lb_raddr, .tb0_re, .tb0_raddr, .tb1_re, .tb1_raddr,
    .sqb_valid, .sqb_pos, .sqb_a_addr, .sqb_b_addr, .sqb_a_sel, .sqb_new_row,
    .sqb_pop, .sqb_restart,
    .up_valid, .up_pop, .imp_waddr,
    .rd_valid, .mse_compute, .mse_load_w, .mse_drain, .mse_shift, .mse_clr, .mse_xsel,
    .o_valid, .o_first, .o_last, .o_row, .o_col,
    .tk_ready, .tk_busy, .nl_busy,
    .n_mode_switch, .n_tk_stall, .n_dep_wait
  );

  assign imp_we = up_pop;   // FIFO head is valid in the cycle it is popped
  assign busy   = active;

  // ---------------- buffers ----------------
  logic              h_wr;
  logic              lb_we, tb0_we, tb1_we;
  logic [BAW-1:0]    lb_wa, tb0_wa, tb1_wa;
  logic [RS*DATA_W-1:0] lb_wd, lb_rd;
  logic [CS*DATA_W-1:0] tb0_wd, tb1_wd, tb0_rd, tb1_rd;
  logic              host_blocked;

  assign host_blocked = active && cfg.mode == MODE_IMPORT;
  assign h_wr = h_valid && h_we && !host_blocked;

  always_comb begin
    lb_we  = h_wr && h_tgt == HT_LB;
    tb0_we = h_wr && h_tgt == HT_TB0;
    tb1_we = h_wr && h_tgt == HT_TB1;
    lb_wa  = BAW'(h_addr);  tb0_wa = BAW'(h_addr);  tb1_wa = BAW'(h_addr);
    lb_wd  = h_wdata[RS*DATA_W-1:0];
    tb0_wd = h_wdata[CS*DATA_W-1:0];
    tb1_wd = h_wdata[CS*DATA_W-1:0];
    if (imp_we) begin
      unique case (cfg.imp_dst)
        BUF_LB:  begin lb_we  = 1'b1; lb_wa  = BAW'(imp_waddr); lb_wd  = (RS*DATA_W)'(up_data); end
        BUF_TB1: begin tb1_we = 1'b1; tb1_wa = BAW'(imp_waddr); tb1_wd = up_data; end
        default: begin tb0_we = 1'b1; tb0_wa = BAW'(imp_waddr); tb0_wd = up_data; end
      endcase
    end
  end

  sdp_ram #(.W(RS*DATA_W), .DEPTH(BUF_DEPTH)) u_lb (
    .clk, .we(lb_we), .waddr(lb_wa), .wdata(lb_wd),
    .re(lb_re), .raddr(BAW'(lb_raddr)), .rdata(lb_rd));
  sdp_ram #(.W(CS*DATA_W), .DEPTH(BUF_DEPTH)) u_tb0 (
    .clk, .we(tb0_we), .waddr(tb0_wa), .wdata(tb0_wd),
    .re(tb0_re), .raddr(BAW'(tb0_raddr)), .rdata(tb0_rd));
  sdp_ram #(.W(CS*DATA_W), .DEPTH(BUF_DEPTH)) u_tb1 (
    .clk, .we(tb1_we), .waddr(tb1_wa), .wdata(tb1_wd),
    .re(tb1_re), .raddr(BAW'(tb1_raddr)), .rdata(tb1_rd));

  // per-lane normalisation parameters
  logic signed [FX_W-1:0] p_scale [CS];
  logic signed [FX_W-1:0] p_bias  [CS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < CS; l++) begin
        p_scale[l] <= 16'sd256;
        p_bias[l]  <= '0;
      end
    end else if (h_valid && h_we && h_tgt == HT_PARAM) begin
      for (int l = 0; l < CS; l++) begin
        if (h_addr[0]) p_bias[l]  <= h_wdata[l*FX_W +: FX_W];
        else           p_scale[l] <= h_wdata[l*FX_W +: FX_W];
      end
    end
  end

  // ---------------- feed schedulers and MSE ----------------
  logic [DATA_W-1:0]        lb_lane [RS];
  logic [DATA_W-1:0]        tb0_lane [CS];
  logic [DATA_W-1:0]        left_out [RS];
  logic [DATA_W-1:0]        top_out  [CS];
  logic [RS-1:0]            left_v;
  logic [CS-1:0]            top_v;
  logic signed [DATA_W-1:0] a_west [RS];
  logic signed [DATA_W-1:0] b_north [CS];
  logic signed [DATA_W-1:0] x_col [CS];
  logic signed [DATA_W-1:0] x_bcast;
  logic signed [ACC_W-1:0]  col_out [CS];
  logic [ACC_W-1:0]         col_out_u [CS];
  logic [ACC_W-1:0]         deskew_out [CS];
  logic [CS-1:0]            deskew_v;
  logic                     sys_mode;

  assign sys_mode = (cfg.mode == MODE_OS || cfg.mode == MODE_WS);

  always_comb begin
    for (int i = 0; i < RS; i++) lb_lane[i] = lb_rd[i*DATA_W +: DATA_W];
    for (int j = 0; j < CS; j++) tb0_lane[j] = tb0_rd[j*DATA_W +: DATA_W];
  end

  feed_skew #(.N(RS), .W(DATA_W), .REVERSE(1'b0)) u_left (
    .clk, .rst_n, .en(1'b1),
    .in_vec(lb_lane), .in_valid(rd_valid && sys_mode && !mse_load_w),
    .out_vec(left_out), .out_valid(left_v));

  feed_skew #(.N(CS), .W(DATA_W), .REVERSE(1'b0)) u_top (
    .clk, .rst_n, .en(1'b1),
    .in_vec(tb0_lane), .in_valid(rd_valid && cfg.mode == MODE_OS),
    .out_vec(top_out), .out_valid(top_v));

  always_comb begin
    for (int i = 0; i < RS; i++) a_west[i] = left_out[i];
    for (int j = 0; j < CS; j++) begin
      b_north[j] = (cfg.mode == MODE_OS) ? top_out[j] : (rd_valid ? tb0_lane[j] : '0);
      x_col[j]   = rd_valid ? tb1_rd[j*DATA_W +: DATA_W] : '0;
    end
    x_bcast = lb_lane[mse_xsel[$clog2(RS > 1 ? RS : 2)-1:0]];
  end

  trine_mse #(.RS(RS), .CS(CS)) u_mse (
    .clk, .rst_n, .en(1'b1),
    .mode     (cfg.mode),
    .compute  (mse_compute),
    .load_w   (mse_load_w),
    .drain    (mse_drain),
    .shift    (mse_shift),
    .clr      (mse_clr),
    .elt_add  (cfg.elt_add),
    .radt_lg  (cfg.radt_lg),
    .lane_mask(cfg.lane_mask[CS-1:0]),
    .a_west, .b_north, .x_col, .x_bcast,
    .col_out
  );

  always_comb for (int j = 0; j < CS; j++) col_out_u[j] = col_out[j];

  feed_skew #(.N(CS), .W(ACC_W), .REVERSE(1'b1)) u_bottom (
    .clk, .rst_n, .en(1'b1),
    .in_vec(col_out_u), .in_valid(cfg.mode == MODE_WS),
    .out_vec(deskew_out), .out_valid(deskew_v));

  // ---------------- top-k engine ----------------
  logic signed [ACC_W-1:0] tk_in [CS];
  logic [CS-1:0]           tk_lv;
  logic                    tk_ov, tk_olast;
  logic [CS-1:0]           tk_olv;
  logic signed [ACC_W-1:0] tk_oval [CS];
  pos_t                    tk_opos [CS];

  always_comb begin
    for (int j = 0; j < CS; j++) begin
      tk_in[j] = (cfg.mode == MODE_WS) ? $signed(deskew_out[j]) : col_out[j];
      tk_lv[j] = (cfg.mode == MODE_RADT) ? ((j % (1 << cfg.radt_lg)) == 0) : 1'b1;
    end
  end

  topk_engine #(.N(CS), .KMAX(KMAX), .CB_DEPTH(CB_DEPTH), .AF_MARGIN(CB_DEPTH/2)) u_topk (
    .clk, .rst_n,
    .sort_en (cfg.sort_en),
    .topk_en (cfg.topk_en),
    .k       (cfg.topk_k[$clog2(KMAX+1)-1:0]),
    .thr_en  (cfg.thr_en),
    .thr     (cfg.thr),
    .in_valid(o_valid),
    .in_ready(tk_ready),
    .in_first(o_first),
    .in_last (o_last),
    .in_row  (o_row),
    .in_col_base(o_col),
    .in_lane_valid(tk_lv),
    .in_val  (tk_in),
    .out_valid(tk_ov),
    .out_last (tk_olast),
    .out_lane_valid(tk_olv),
    .out_val (tk_oval),
    .out_pos (tk_opos),
    .busy    (tk_busy)
  );

  // ---------------- sparse queue buffer ----------------
  pos_t    sqb_wpos [CS];
  logic    sqb_we;
  logic [CS-1:0] sqb_wmask;
  logic    h_sqb;

  assign h_sqb = h_valid && h_we && h_tgt == HT_SQB;

  always_comb begin
    sqb_we    = 1'b0;
    sqb_wmask = '0;
    for (int l = 0; l < CS; l++) sqb_wpos[l] = tk_opos[l];
    if (tk_ov && cfg.sqb_load) begin
      sqb_we    = 1'b1;
      sqb_wmask = tk_olv;
    end else if (h_sqb) begin
      sqb_we       = 1'b1;
      sqb_wmask    = CS'(1);
      sqb_wpos[0]  = pos_t'(h_wdata[$bits(pos_t)-1:0]);
    end
  end

  sparse_queue_buffer #(.N(CS), .DEPTH(SQB_DEPTH)) u_sqb (
    .clk, .rst_n,
    .wr_en   (sqb_we),
    .wr_mask (sqb_wmask),
    .wr_pos  (sqb_wpos),
    .wr_ready(sqb_wr_ready),
    .mode    (cfg.mode),
    .a_base  (cfg.a_base),
    .b_base  (cfg.b_base),
    .restart (sqb_restart),
    .rd_valid(sqb_valid),
    .pop     (sqb_pop),
    .rd_pos  (sqb_pos),
    .a_addr  (sqb_a_addr),
    .b_addr  (sqb_b_addr),
    .a_sel   (sqb_a_sel),
    .new_row (sqb_new_row),
    .entries ()
  );

  // ---------------- nonlinear unit and bottom buffer ----------------
  logic                     nl_ov, nl_olast;
  logic [CS-1:0]            nl_olv;
  logic signed [DATA_W-1:0] nl_q [CS];
  logic [3:0]               nl_inflight;
  logic [CS*DATA_W-1:0]     bb_wd;
  logic [BAW-1:0]           bb_cnt;

  nonlinear_unit #(.N(CS)) u_nl (
    .clk, .rst_n,
    .in_shift (cfg.in_shift),
    .norm_mode(cfg.norm),
    .act_mode (cfg.act),
    .out_shift(cfg.out_shift),
    .param_scale(p_scale),
    .param_bias (p_bias),
    .in_valid (tk_ov),
    .in_last  (tk_olast),
    .in_lane_valid(tk_olv),
    .in_v     (tk_oval),
    .out_valid(nl_ov),
    .out_last (nl_olast),
    .out_lane_valid(nl_olv),
    .out_q    (nl_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nl_inflight <= '0;
    else nl_inflight <= nl_inflight + 4'(tk_ov) - 4'(nl_ov);
  end
  assign nl_busy = (nl_inflight != '0);

  always_comb
    for (int l = 0; l < CS; l++) bb_wd[l*DATA_W +: DATA_W] = nl_olv[l] ? nl_q[l] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bb_cnt <= '0;
    else if (start) bb_cnt <= '0;
    else if (nl_ov) bb_cnt <= bb_cnt + 1'b1;
  end

  logic [CS*DATA_W-1:0] bb_rd;
  sdp_ram #(.W(CS*DATA_W), .DEPTH(BUF_DEPTH)) u_bb (
    .clk, .we(nl_ov), .waddr(BAW'(cfg.out_base) + bb_cnt), .wdata(bb_wd),
    .re(h_valid && !h_we && h_tgt == HT_BB), .raddr(BAW'(h_addr)), .rdata(bb_rd));

  assign h_rdata = HOST_W'(bb_rd);
  assign dn_push = nl_ov && cfg.fwd;
  assign dn_data = bb_wd;

  // words removed by the top-k merge: counted per selection group
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_pruned_words <= '0;
    else if (tk_ov && cfg.topk_en && tk_olast) n_pruned_words <= n_pruned_words + 1'b1;
  end

  // ---------------- host handshake ----------------
  always_comb begin
    unique case (h_tgt)
      HT_INSTR: h_ready = iq_ready;
      HT_SQB:   h_ready = sqb_wr_ready && !(tk_ov && cfg.sqb_load);
      HT_LB, HT_TB0, HT_TB1: h_ready = !host_blocked;
      default:  h_ready = 1'b1;
    endcase
  end

endmodule
