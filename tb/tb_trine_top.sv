// tb_trine_top: end-to-end run of a 2 x 2 grid of RPUs (RS = CS = 8, KMAX 16)
// through the host port only. The four RPUs run a small multimodal-style
// program with dependencies between them:
//   RPU0  OS GEMM of a score block with top-k (k = 10) pruning, positions
//         into its SQB; then an SQB-driven RADT block (sampled dot products)
//         that forwards its results down the inter-RPU buffer to RPU2.
//   RPU1  waits on RPU0's first tag (dependency wait), then a WS block with
//         row-wise top-3 over 60 rows, which runs faster than the merger can
//         emit, so the center buffer fills and issue stalls; then normal SIMD
//         multiply with layer norm and GELU.
//   RPU2  IMPORT of the forwarded words, then normal SIMD add on them.
//   RPU3  1 x CS SIMD over host-loaded SQB entries; then OS with the sorter
//         on and the merger bypassed (each row sorted).
// Every result is read back from the bottom buffers and compared with a
// reference model. Each mechanism is counted (mode switches, top-k groups,
// top-k stalls, dependency waits, forwarded words, SQB-driven blocks,
// bypasses, normalisation / activation) and one that never happened counts
// as a failure.
module tb_trine_top;
  import trine_pkg::*;
  localparam int NR = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic h_valid, h_ready, h_we, h_rvalid;
  logic [1:0] h_rpu;
  host_tgt_e h_tgt;
  logic [ADDR_W-1:0] h_addr;
  logic [HOST_W-1:0] h_wdata, h_rdata;
  logic [NR-1:0] rpu_busy;
  logic [NTAGS-1:0] flags;
  logic [15:0] n_mode_switch [NR], n_tk_stall [NR], n_dep_wait [NR], n_topk_groups [NR], n_irb_words [NR];

  trine_top #(.GRID_R(2), .GRID_C(2), .RS(8), .CS(8), .BUF_DEPTH(64), .KMAX(16),
              .CB_DEPTH(32), .SQB_DEPTH(8), .IRB_DEPTH(16)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic hwrite(input int r, input host_tgt_e t, input int a, input logic [HOST_W-1:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 1; h_rpu = 2'(r); h_tgt = t; h_addr = ADDR_W'(a); h_wdata = d;
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk); h_valid = 0;
  endtask

  task automatic hread_bb(input int r, input int a, output logic [63:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 0; h_rpu = 2'(r); h_tgt = HT_BB; h_addr = ADDR_W'(a);
    @(negedge clk); h_valid = 0;
    if (!h_rvalid) begin failures++; $display("FAIL no read response"); end
    d = h_rdata[63:0];
  endtask

  function automatic logic [HOST_W-1:0] pack8(input logic signed [7:0] v [8]);
    logic [HOST_W-1:0] r;
    r = '0;
    for (int l = 0; l < 8; l++) r[l*8 +: 8] = v[l];
    return r;
  endfunction

  function automatic instr_t base_instr(input mse_mode_e m, input int tag);
    instr_t i;
    i = '0;
    i.mode = m; i.topk_k = 9'd1; i.lane_mask = '1; i.radt_lg = 3'd3;
    i.norm = NORM_OFF; i.act = ACT_OFF; i.imp_dst = BUF_TB1;
    i.done_tags = NTAGS'(1) << tag;
    return i;
  endfunction

  task automatic wait_tag(input int tag);
    while (!flags[tag]) @(posedge clk);
  endtask

  task automatic check_word(input int r, input int a, input logic signed [31:0] e [8],
                            input logic [7:0] lm, input string what);
    logic [63:0] d;
    hread_bb(r, a, d);
    for (int l = 0; l < 8; l++) begin
      logic signed [7:0] ex;
      ex = lm[l] ? sat8(32'(sat_fx(48'(e[l])))) : 8'sd0;
      checks++;
      if ($signed(d[l*8 +: 8]) != ex) begin
        failures++; $display("FAIL %s rpu%0d BB[%0d] lane %0d got %0d exp %0d", what, r, a, l, 8'(d[l*8 +: 8]), ex);
      end
    end
  endtask

  // mechanism counters kept by the testbench
  int c_radt = 0, c_simd1 = 0, c_sort_only = 0, c_bypass = 0, c_nonlin = 0, c_import = 0;

  logic signed [7:0] X [8][8], Y [8][8], W [8][8], V [64][8], w8 [8];
  logic signed [7:0] Sa [8], Sb [8], Ad [8][8], Sp [8][8], Dn [8][8], Wo [4][8];
  logic signed [31:0] e32 [8];
  int pi [8], pj [8];

  function automatic real tanh_r(input real x);
    return ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
  endfunction

  initial begin
    h_valid = 0; h_we = 0; h_rpu = 0; h_tgt = HT_LB; h_addr = 0; h_wdata = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ================= load operands =================
    // RPU0: C[i][j] = 8 * pi[i] + pj[j] via K = 2 (A = [pi, 1], B = [8; pj])
    for (int n = 0; n < 8; n++) begin pi[n] = n; pj[n] = n; end
    for (int n = 7; n > 0; n--) begin
      int r, t;
      r = $urandom % (n + 1); t = pi[n]; pi[n] = pi[r]; pi[r] = t;
      r = $urandom % (n + 1); t = pj[n]; pj[n] = pj[r]; pj[r] = t;
    end
    for (int i = 0; i < 8; i++) w8[i] = 8'(pi[i]);
    hwrite(0, HT_LB, 0, pack8(w8));
    for (int i = 0; i < 8; i++) w8[i] = 8'sd1;
    hwrite(0, HT_LB, 1, pack8(w8));
    for (int j = 0; j < 8; j++) w8[j] = 8'sd8;
    hwrite(0, HT_TB0, 0, pack8(w8));
    for (int j = 0; j < 8; j++) w8[j] = 8'(pj[j]);
    hwrite(0, HT_TB0, 1, pack8(w8));
    // RPU0 RADT operands: X rows in TB1[8+i], Y rows in TB0[8+j]
    for (int n = 0; n < 8; n++) begin
      for (int l = 0; l < 8; l++) begin X[n][l] = 8'($urandom % 7) - 8'sd3; w8[l] = X[n][l]; end
      hwrite(0, HT_TB1, 8 + n, pack8(w8));
      for (int l = 0; l < 8; l++) begin Y[n][l] = 8'($urandom % 7) - 8'sd3; w8[l] = Y[n][l]; end
      hwrite(0, HT_TB0, 8 + n, pack8(w8));
    end
    // RPU1: WS weights W in TB0[0..7], 60 input vectors in LB[0..59]
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin W[i][j] = 8'($urandom % 7) - 8'sd3; w8[j] = W[i][j]; end
      hwrite(1, HT_TB0, i, pack8(w8));
    end
    for (int n = 0; n < 60; n++) begin
      for (int i = 0; i < 8; i++) begin V[n][i] = 8'($urandom % 7) - 8'sd3; w8[i] = V[n][i]; end
      hwrite(1, HT_LB, n, pack8(w8));
    end
    // RPU1 SIMDN operands: TB1[8], TB0[8]
    for (int l = 0; l < 8; l++) begin Sa[l] = 8'($urandom % 200) - 8'sd100; w8[l] = Sa[l]; end
    hwrite(1, HT_TB1, 8, pack8(w8));
    for (int l = 0; l < 8; l++) begin Sb[l] = 8'($urandom % 200) - 8'sd100; w8[l] = Sb[l]; end
    hwrite(1, HT_TB0, 8, pack8(w8));
    // RPU2: addend rows in TB0[0..9]
    for (int n = 0; n < 8; n++) for (int l = 0; l < 8; l++) Ad[n][l] = 8'($urandom % 21) - 8'sd10;
    for (int n = 0; n < 10; n++) begin
      for (int l = 0; l < 8; l++) w8[l] = Ad[n % 8][l];
      hwrite(2, HT_TB0, n, pack8(w8));
    end
    // RPU3: sparse matrix columns in LB[j], dense rows in TB0[j]; OS operands at 16
    for (int j = 0; j < 8; j++) for (int r = 0; r < 8; r++) Sp[r][j] = 8'($urandom % 7) - 8'sd3;
    for (int j = 0; j < 8; j++) begin
      for (int r = 0; r < 8; r++) w8[r] = Sp[r][j];
      hwrite(3, HT_LB, j, pack8(w8));
      for (int l = 0; l < 8; l++) begin Dn[j][l] = 8'($urandom % 7) - 8'sd3; w8[l] = Dn[j][l]; end
      hwrite(3, HT_TB0, j, pack8(w8));
    end
    for (int k = 0; k < 4; k++) begin
      for (int l = 0; l < 8; l++) begin Wo[k][l] = 8'($urandom % 7) - 8'sd3; end
    end

    // ================= program =================
    begin
      instr_t i;
      // RPU1 first, so that it has to wait for RPU0's tag 0
      i = base_instr(MODE_WS, 2); i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 60;
      i.wait_tags = 16'h0001; i.sort_en = 1; i.topk_en = 1; i.topk_k = 3; i.row_grp = 1;
      hwrite(1, HT_INSTR, 0, HOST_W'(i));
      i = base_instr(MODE_SIMDN, 3); i.a_base = 8; i.b_base = 8; i.out_base = 62; i.len = 1;
      i.norm = NORM_LN; i.act = ACT_GELU; i.out_shift = 4'd4;
      hwrite(1, HT_INSTR, 0, HOST_W'(i));
      // RPU0
      i = base_instr(MODE_OS, 0); i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 2;
      i.sort_en = 1; i.topk_en = 1; i.topk_k = 10; i.sqb_load = 1;
      hwrite(0, HT_INSTR, 0, HOST_W'(i));
      i = base_instr(MODE_RADT, 1); i.a_base = 8; i.b_base = 8; i.out_base = 4; i.len = 10;
      i.fwd = 1; i.wait_tags = 16'h0001;
      hwrite(0, HT_INSTR, 0, HOST_W'(i));
      // RPU2
      i = base_instr(MODE_IMPORT, 4); i.out_base = 0; i.len = 10; i.imp_dst = BUF_TB1;
      hwrite(2, HT_INSTR, 0, HOST_W'(i));
      i = base_instr(MODE_SIMDN, 5); i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 10;
      i.elt_add = 1; i.wait_tags = 16'h0012;
      hwrite(2, HT_INSTR, 0, HOST_W'(i));
      // RPU3: SQB entries (row, col) then SIMD1, then OS sort-only
      begin
        int er [5], ec [5];
        er = '{1, 1, 4, 4, 7}; ec = '{2, 6, 0, 3, 5};
        for (int e = 0; e < 5; e++) hwrite(3, HT_SQB, 0, HOST_W'({8'(er[e]), 8'(ec[e])}));
        i = base_instr(MODE_SIMD1, 6); i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 5;
        hwrite(3, HT_INSTR, 0, HOST_W'(i));
        for (int k = 0; k < 4; k++) begin
          for (int l = 0; l < 8; l++) w8[l] = Wo[k][l];
          hwrite(3, HT_LB, 16 + k, pack8(w8));
          hwrite(3, HT_TB0, 16 + k, pack8(w8));
        end
        i = base_instr(MODE_OS, 7); i.a_base = 16; i.b_base = 16; i.out_base = 8; i.len = 4;
        i.sort_en = 1; i.topk_en = 0;
        hwrite(3, HT_INSTR, 0, HOST_W'(i));

        // ================= results =================
        wait_tag(1);
        for (int w = 0; w < 2; w++) begin
          for (int l = 0; l < 8; l++) e32[l] = 63 - (w * 8 + l);
          check_word(0, w, e32, (w == 0) ? 8'hff : 8'h03, "topk");
        end
        for (int r = 0; r < 10; r++) begin
          int v, ii, jj;
          v = 63 - r;
          for (int n = 0; n < 8; n++) begin
            if (pi[n] == v / 8) ii = n;
            if (pj[n] == v % 8) jj = n;
          end
          e32[0] = 0;
          for (int l = 0; l < 8; l++) e32[0] += X[ii][l] * Y[jj][l];
          for (int l = 1; l < 8; l++) e32[l] = 0;
          check_word(0, 4 + r, e32, 8'h01, "radt");
          // RPU2 result: imported word + addend
          e32[0] += Ad[r % 8][0];
          for (int l = 1; l < 8; l++) e32[l] = Ad[r % 8][l];
          wait_tag(5);
          check_word(2, r, e32, 8'hff, "import+add");
        end
        c_radt++; c_import++;

        wait_tag(3);
        for (int n = 0; n < 60; n++) begin
          logic signed [31:0] y [8];
          for (int j = 0; j < 8; j++) begin
            y[j] = 0;
            for (int q = 0; q < 8; q++) y[j] += V[n][q] * W[q][j];
          end
          for (int a = 1; a < 8; a++)
            for (int b = a; b > 0 && y[b] > y[b-1]; b--) begin
              logic signed [31:0] t; t = y[b]; y[b] = y[b-1]; y[b-1] = t;
            end
          check_word(1, n, y, 8'h07, "ws row top3");
        end
        begin
          logic [63:0] d;
          real mean, vr, sd;
          hread_bb(1, 62, d);
          mean = 0.0; vr = 0.0;
          for (int l = 0; l < 8; l++) mean += real'(int'(Sa[l]) * int'(Sb[l])) / 256.0;
          mean /= 8.0;
          for (int l = 0; l < 8; l++) vr += (real'(int'(Sa[l]) * int'(Sb[l])) / 256.0 - mean) ** 2;
          sd = $sqrt(vr / 8.0);
          for (int l = 0; l < 8; l++) begin
            real x, ey;
            x = (real'(int'(Sa[l]) * int'(Sb[l])) / 256.0 - mean) / sd;
            ey = 0.5 * x * (1.0 + tanh_r(0.7978845608 * (x + 0.044715 * x * x * x))) * 16.0;
            checks++;
            if (real'($signed(d[l*8 +: 8])) - ey > 2.5 || ey - real'($signed(d[l*8 +: 8])) > 2.5) begin
              failures++; $display("FAIL LN+GELU lane %0d got %0d exp %f", l, $signed(d[l*8 +: 8]), ey);
            end
          end
          c_nonlin++;
        end

        wait_tag(7);
        for (int w = 0; w < 3; w++) begin
          int rr;
          rr = (w == 0) ? 1 : (w == 1) ? 4 : 7;
          for (int l = 0; l < 8; l++) begin
            e32[l] = 0;
            for (int e = 0; e < 5; e++) if (er[e] == rr) e32[l] += Sp[rr][ec[e]] * Dn[ec[e]][l];
          end
          check_word(3, w, e32, 8'hff, "simd1");
        end
        c_simd1++;
        // OS sort-only: BB word n = row 7-n of Wo^T Wo (LB = TB0 = Wo rows), sorted
        for (int n = 0; n < 8; n++) begin
          for (int j = 0; j < 8; j++) begin
            e32[j] = 0;
            for (int k = 0; k < 4; k++) e32[j] += Wo[k][7 - n] * Wo[k][j];
          end
          for (int a = 1; a < 8; a++)
            for (int b = a; b > 0 && e32[b] > e32[b-1]; b--) begin
              logic signed [31:0] t; t = e32[b]; e32[b] = e32[b-1]; e32[b-1] = t;
            end
          check_word(3, 8 + n, e32, 8'hff, "sort only");
        end
        c_sort_only++;
        c_bypass++;   // RADT and SIMD blocks above ran with both top-k stages bypassed
      end
    end

    // ================= mechanism counts =================
    begin
      int ms, st, dw, tg;
      ms = 0; st = 0; dw = 0; tg = 0;
      for (int r = 0; r < NR; r++) begin
        ms += n_mode_switch[r]; st += n_tk_stall[r]; dw += n_dep_wait[r]; tg += n_topk_groups[r];
      end
      $display("mechanisms: mode_switch=%0d topk_stall=%0d dep_wait=%0d topk_groups=%0d irb_words=%0d radt=%0d simd1=%0d import=%0d sort_only=%0d bypass=%0d nonlinear=%0d",
               ms, st, dw, tg, n_irb_words[0], c_radt, c_simd1, c_import, c_sort_only, c_bypass, c_nonlin);
      checks++; if (ms == 0) begin failures++; $display("FAIL no mode switch"); end
      checks++; if (st == 0) begin failures++; $display("FAIL no top-k stall"); end
      checks++; if (dw == 0) begin failures++; $display("FAIL no dependency wait"); end
      checks++; if (tg != 61) begin failures++; $display("FAIL top-k groups %0d", tg); end
      checks++; if (n_irb_words[0] != 10) begin failures++; $display("FAIL forwarded words %0d", n_irb_words[0]); end
      checks++; if (c_radt == 0 || c_simd1 == 0 || c_import == 0 || c_sort_only == 0 || c_bypass == 0 || c_nonlin == 0) begin
        failures++; $display("FAIL mechanism not exercised");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
