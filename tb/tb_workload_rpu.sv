// tb_workload_rpu: two small model layers run end to end on one RPU
// (RS = CS = 8), the way a compiled program would drive it through the host
// port. The layers are the kernel mixes of the evaluated model families, at a
// size that simulates in seconds.
//
//   1 pruned attention head (transformer encoders of the CLIP / DETR style
//     models): 8 tokens, head width 8.
//       a. OS block: S = Q * K^T, row-wise top-3 (row_grp), positions of the
//          kept scores go to the SQB, kept values to BB.
//       b. the host places S (int8) in LB as the sparse operand;
//       c. 1 x CS SIMD block over the SQB: O[i,:] = sum over the 3 kept j of
//          S[i][j] * V[j,:]. Only 24 of the 64 products are computed.
//   2 graph layer (GNN of the anomaly-detection models): 8 nodes.
//       a. 1 x CS SIMD block over edges the host streams into the SQB while
//          the block runs (more edges than the SQB holds): H = Adj * X;
//       b. the host places H in LB;
//       c. WS block: Y = H * W, with in_shift scaling.
// Every output word is compared with a reference computed here. The score
// matrix is drawn so that no row has tied scores, which makes the selected
// set unique. A watchdog ends the run.
module tb_workload_rpu;
  import trine_pkg::*;
  localparam int RS = 8, CS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic h_valid, h_ready, h_we;
  host_tgt_e h_tgt;
  logic [ADDR_W-1:0] h_addr;
  logic [HOST_W-1:0] h_wdata, h_rdata;
  logic [NTAGS-1:0] flags, done_tags;
  logic done, busy, up_valid, up_pop, dn_push;
  logic [CS*8-1:0] up_data, dn_data;
  logic [15:0] n_mode_switch, n_tk_stall, n_dep_wait, n_pruned_words;

  trine_rpu #(.RS(RS), .CS(CS), .BUF_DEPTH(64), .KMAX(16), .CB_DEPTH(16), .SQB_DEPTH(8), .IQ_DEPTH(4)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic hwrite(input host_tgt_e t, input int a, input logic [HOST_W-1:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 1; h_tgt = t; h_addr = ADDR_W'(a); h_wdata = d;
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk); h_valid = 0;
  endtask

  task automatic hread_bb(input int a, output logic [CS*8-1:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 0; h_tgt = HT_BB; h_addr = ADDR_W'(a);
    @(negedge clk); h_valid = 0;
    d = h_rdata[CS*8-1:0];
  endtask

  function automatic logic [HOST_W-1:0] pack8(input logic signed [7:0] v [8]);
    logic [HOST_W-1:0] r;
    r = '0;
    for (int l = 0; l < 8; l++) r[l*8 +: 8] = v[l];
    return r;
  endfunction

  function automatic instr_t base_instr(input mse_mode_e m);
    instr_t i;
    i = '0;
    i.mode = m; i.topk_k = 9'd1; i.lane_mask = '1; i.radt_lg = 3'd3;
    i.norm = NORM_OFF; i.act = ACT_OFF; i.imp_dst = BUF_TB1;
    return i;
  endfunction

  int ndone = 0;
  always @(posedge clk) if (done) ndone++;

  task automatic run(input instr_t i);
    int d0;
    d0 = ndone;
    hwrite(HT_INSTR, 0, HOST_W'(i));
    while (ndone == d0) @(posedge clk);
  endtask

  task automatic check_bb(input int a, input logic signed [31:0] e [8], input logic [7:0] lmask,
                          input string what, input int shift = 0);
    logic [CS*8-1:0] d;
    hread_bb(a, d);
    for (int l = 0; l < CS; l++) begin
      logic signed [7:0] ex;
      ex = lmask[l] ? sat8(32'(sat_fx(48'(e[l] >>> shift)))) : 8'sd0;
      checks++;
      if ($signed(d[l*8 +: 8]) != ex) begin
        failures++; $display("FAIL %s BB[%0d] lane %0d got %0d exp %0d", what, a, l, $signed(d[l*8 +: 8]), ex);
      end
    end
  endtask

  logic signed [7:0] Q [8][8], K [8][8], V [8][8], X [8][8], W [8][8], Hq [8][8], w8 [8];
  int S [8][8], Hs [8][8];
  logic signed [31:0] e32 [8];
  bit keep [8][8];
  bit adj [8][8];
  int nedge;

  initial begin
    h_valid = 0; h_we = 0; h_tgt = HT_LB; h_addr = 0; h_wdata = '0; flags = '0;
    up_valid = 0; up_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ================= 1: pruned attention head =================
    begin
      bit tie;
      do begin
        for (int t = 0; t < 8; t++) for (int d = 0; d < 8; d++) begin
          Q[t][d] = 8'($urandom % 7) - 8'sd3; K[t][d] = 8'($urandom % 7) - 8'sd3;
        end
        tie = 0;
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
          S[i][j] = 0;
          for (int d = 0; d < 8; d++) S[i][j] += Q[i][d] * K[j][d];
        end
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) for (int m = j + 1; m < 8; m++)
          if (S[i][j] == S[i][m]) tie = 1;
      end while (tie);
    end
    // LB word d lane i = Q[i][d]; TB0 word d lane j = K[j][d]
    for (int d = 0; d < 8; d++) begin
      for (int i = 0; i < 8; i++) w8[i] = Q[i][d];
      hwrite(HT_LB, d, pack8(w8));
      for (int j = 0; j < 8; j++) w8[j] = K[j][d];
      hwrite(HT_TB0, d, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_OS); i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 8;
      i.sort_en = 1; i.topk_en = 1; i.topk_k = 3; i.row_grp = 1; i.sqb_load = 1;
      run(i);
    end
    // reference selection; BB word n holds the top 3 of row 7 - n, descending
    for (int i = 0; i < 8; i++) begin
      int v [8];
      for (int j = 0; j < 8; j++) v[j] = S[i][j];
      for (int j = 0; j < 8; j++) begin
        int above;
        above = 0;
        for (int m = 0; m < 8; m++) if (v[m] > v[j]) above++;
        keep[i][j] = (above < 3);
        if (above < 3) e32[above] = v[j];
      end
      for (int l = 3; l < 8; l++) e32[l] = 0;
      check_bb(7 - i, e32, 8'h07, "ATT top-3");
    end
    // sparse operand: LB word 16 + j lane i = S[i][j]; V rows in TB0
    for (int j = 0; j < 8; j++) begin
      for (int i = 0; i < 8; i++) w8[i] = sat8(32'(S[i][j]));
      hwrite(HT_LB, 16 + j, pack8(w8));
      for (int l = 0; l < 8; l++) begin V[j][l] = 8'($urandom % 7) - 8'sd3; w8[l] = V[j][l]; end
      hwrite(HT_TB0, 16 + j, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_SIMD1); i.a_base = 16; i.b_base = 16; i.out_base = 8; i.len = 24;
      i.in_shift = 5'd3;
      run(i);
    end
    // the SQB was filled row 7 first, so BB word 8 + n is row 7 - n
    for (int n = 0; n < 8; n++) begin
      int i;
      i = 7 - n;
      for (int l = 0; l < 8; l++) begin
        e32[l] = 0;
        for (int j = 0; j < 8; j++) if (keep[i][j]) e32[l] += int'(sat8(32'(S[i][j]))) * V[j][l];
      end
      check_bb(8 + n, e32, 8'hff, "ATT S*V", 3);
    end

    // ================= 2: graph layer =================
    nedge = 0;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) adj[i][j] = ($urandom % 3 == 0);
      adj[i][i] = 1;                                    // self loop keeps every row non-empty
    end
    // LB word 24 + j lane i = Adj[i][j]; node features X rows in TB0
    for (int j = 0; j < 8; j++) begin
      for (int i = 0; i < 8; i++) w8[i] = adj[i][j] ? 8'sd1 : 8'sd0;
      hwrite(HT_LB, 24 + j, pack8(w8));
      for (int l = 0; l < 8; l++) begin X[j][l] = 8'($urandom % 15) - 8'sd7; w8[l] = X[j][l]; end
      hwrite(HT_TB0, 24 + j, pack8(w8));
    end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) if (adj[i][j]) nedge++;
    // the edge list is longer than the SQB: queue the block first, then
    // stream the edges in while it runs (h_ready holds the host back)
    begin
      instr_t i;
      int d0;
      d0 = ndone;
      i = base_instr(MODE_SIMD1); i.a_base = 24; i.b_base = 24; i.out_base = 16; i.len = 16'(nedge);
      hwrite(HT_INSTR, 0, HOST_W'(i));
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
        if (adj[r][c]) hwrite(HT_SQB, 0, HOST_W'({8'(r), 8'(c)}));
      while (ndone == d0) @(posedge clk);
    end
    for (int i = 0; i < 8; i++) begin
      for (int l = 0; l < 8; l++) begin
        Hs[i][l] = 0;
        for (int j = 0; j < 8; j++) if (adj[i][j]) Hs[i][l] += X[j][l];
        e32[l] = Hs[i][l];
        Hq[i][l] = sat8(32'(Hs[i][l]));
      end
      check_bb(16 + i, e32, 8'hff, "GNN aggregate");
    end
    // combine: Y = H * W (WS), vectors from LB 32 + i, weights in TB0 32..39
    for (int i = 0; i < 8; i++) begin
      for (int l = 0; l < 8; l++) w8[l] = Hq[i][l];
      hwrite(HT_LB, 32 + i, pack8(w8));
      for (int l = 0; l < 8; l++) begin W[i][l] = 8'($urandom % 7) - 8'sd3; w8[l] = W[i][l]; end
      hwrite(HT_TB0, 32 + i, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_WS); i.a_base = 32; i.b_base = 32; i.out_base = 24; i.len = 8;
      i.in_shift = 5'd2;
      run(i);
    end
    for (int n = 0; n < 8; n++) begin
      for (int l = 0; l < 8; l++) begin
        e32[l] = 0;
        for (int k = 0; k < 8; k++) e32[l] += Hq[n][k] * W[k][l];
      end
      check_bb(24 + n, e32, 8'hff, "GNN combine", 2);
    end

    checks++;
    if (n_mode_switch == 0) begin failures++; $display("FAIL no mode switch counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
