// tb_trine_rpu: one RPU at RS = CS = 8 (KMAX 16, 64-word buffers), driven only
// through its host port and the upstream inter-RPU port, results read back from
// the bottom buffer BB. Each test loads operands, pushes instruction blocks and
// compares BB with a reference model:
//   1 OS GEMM       C = A (8 x K) * B (K x 8); BB word n = row 7-n
//   2 WS            y_n = x_n * W for a stream of LB vectors
//   3 OS + top-k    C with distinct values; top-k (k = 10) of the whole 8 x 8
//                   block, values in BB (descending), positions into the SQB
//   4 RADT          the 10 SQB positions (i,j) -> S = TB1[i] . TB0[j] (P = 8),
//                   then a second RADT run with P = 2 and a lane mask
//   5 1 x CS SIMD   host-loaded SQB entries (i,j) -> C[i,:] += A[i,j] * B[j,:],
//                   one BB word per run of equal rows
//   6 normal SIMD   element-wise add and multiply, one run with ELU
//   7 IMPORT + fwd  words from the upstream port into TB1, a SIMDN block that
//                   forwards results downstream (compared with BB)
//   8 dependency    a block waiting on a flag does not start until it is set,
//                   and done_tags pulses with the block's tags
// The event counters (mode switches, dependency waits, pruned groups) must
// all have moved by the end.
module tb_trine_rpu;
  import trine_pkg::*;
  localparam int RS = 8, CS = 8, LG = 3;
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
    repeat (60000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- host helpers ----------------
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
    i.mode = m; i.topk_k = 9'd1; i.lane_mask = '1; i.radt_lg = 3'(LG);
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

  // compare BB word a with expected int32 values (saturated like the unit)
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

  logic signed [7:0] A [8][8], B [8][8], X [8][8], Y [8][8], w8 [8];
  logic signed [31:0] e32 [8];
  int pi [8], pj [8];
  int kk;
  logic [CS*8-1:0] fwd_q [$];
  always @(posedge clk) if (dn_push) fwd_q.push_back(dn_data);

  initial begin
    h_valid = 0; h_we = 0; h_tgt = HT_LB; h_addr = 0; h_wdata = '0; flags = '0;
    up_valid = 0; up_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- 1: OS GEMM ----------------
    kk = 6;
    for (int i = 0; i < 8; i++) for (int k = 0; k < 8; k++) begin
      A[i][k] = 8'($urandom % 7) - 8'sd3; B[k][i] = 8'($urandom % 7) - 8'sd3;
    end
    for (int k = 0; k < kk; k++) begin
      for (int i = 0; i < 8; i++) w8[i] = A[i][k];
      hwrite(HT_LB, k, pack8(w8));
      for (int j = 0; j < 8; j++) w8[j] = B[k][j];
      hwrite(HT_TB0, 8 + k, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_OS); i.a_base = 0; i.b_base = 8; i.out_base = 0; i.len = 16'(kk);
      run(i);
    end
    for (int n = 0; n < 8; n++) begin
      for (int j = 0; j < 8; j++) begin
        e32[j] = 0;
        for (int k = 0; k < kk; k++) e32[j] += A[7-n][k] * B[k][j];
      end
      check_bb(n, e32, 8'hff, "OS");
    end

    // ---------------- 2: WS ----------------
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) B[i][j] = 8'($urandom % 7) - 8'sd3;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) w8[j] = B[i][j];
      hwrite(HT_TB0, 16 + i, pack8(w8));
    end
    for (int n = 0; n < 10; n++) for (int i = 0; i < 8; i++) X[n % 8][i] = 8'($urandom % 7) - 8'sd3;
    for (int n = 0; n < 8; n++) begin
      for (int i = 0; i < 8; i++) w8[i] = X[n][i];
      hwrite(HT_LB, 8 + n, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_WS); i.a_base = 8; i.b_base = 16; i.out_base = 8; i.len = 8;
      run(i);
    end
    for (int n = 0; n < 8; n++) begin
      for (int j = 0; j < 8; j++) begin
        e32[j] = 0;
        for (int i = 0; i < 8; i++) e32[j] += X[n][i] * B[i][j];
      end
      check_bb(8 + n, e32, 8'hff, "WS");
    end

    // ---------------- 3: OS + top-k into the SQB ----------------
    // C[i][j] = 8 * pi[i] + pj[j] (distinct): A = [pi[i], 1], B = [8; pj[j]]
    for (int n = 0; n < 8; n++) begin pi[n] = n; pj[n] = n; end
    for (int n = 7; n > 0; n--) begin
      int r, t;
      r = $urandom % (n + 1); t = pi[n]; pi[n] = pi[r]; pi[r] = t;
      r = $urandom % (n + 1); t = pj[n]; pj[n] = pj[r]; pj[r] = t;
    end
    for (int i = 0; i < 8; i++) w8[i] = 8'(pi[i]);
    hwrite(HT_LB, 20, pack8(w8));
    for (int i = 0; i < 8; i++) w8[i] = 8'sd1;
    hwrite(HT_LB, 21, pack8(w8));
    for (int j = 0; j < 8; j++) w8[j] = 8'sd8;
    hwrite(HT_TB0, 30, pack8(w8));
    for (int j = 0; j < 8; j++) w8[j] = 8'(pj[j]);
    hwrite(HT_TB0, 31, pack8(w8));
    begin
      instr_t i;
      i = base_instr(MODE_OS); i.a_base = 20; i.b_base = 30; i.out_base = 20; i.len = 2;
      i.sort_en = 1; i.topk_en = 1; i.topk_k = 10; i.sqb_load = 1;
      run(i);
    end
    // expected: values 63 .. 54 in two words (8 + 2 lanes)
    for (int w = 0; w < 2; w++) begin
      for (int l = 0; l < 8; l++) e32[l] = 63 - (w * 8 + l);
      check_bb(20 + w, e32, (w == 0) ? 8'hff : 8'h03, "TOPK");
    end

    // ---------------- 4: RADT over the SQB ----------------
    // S[i][j] = TB1[40 + i] . TB0[40 + j]; SQB holds the positions of 63 .. 54
    for (int n = 0; n < 8; n++) for (int l = 0; l < 8; l++) begin
      X[n][l] = 8'($urandom % 7) - 8'sd3; Y[n][l] = 8'($urandom % 7) - 8'sd3;
    end
    for (int n = 0; n < 8; n++) begin
      for (int l = 0; l < 8; l++) w8[l] = X[n][l];
      hwrite(HT_TB1, 40 + n, pack8(w8));
      for (int l = 0; l < 8; l++) w8[l] = Y[n][l];
      hwrite(HT_TB0, 40 + n, pack8(w8));
    end
    begin
      instr_t i;
      i = base_instr(MODE_RADT); i.a_base = 40; i.b_base = 40; i.out_base = 24; i.len = 10;
      run(i);
    end
    for (int r = 0; r < 10; r++) begin
      int v, ii, jj;
      v = 63 - r;                     // value 8*pi[i] + pj[j]
      for (int n = 0; n < 8; n++) begin
        if (pi[n] == v / 8) ii = n;
        if (pj[n] == v % 8) jj = n;
      end
      e32[0] = 0;
      for (int l = 0; l < 8; l++) e32[0] += X[ii][l] * Y[jj][l];
      for (int l = 1; l < 8; l++) e32[l] = 0;
      check_bb(24 + r, e32, 8'h01, "RADT8");
    end
    // P = 2 with a lane mask, host-loaded SQB entries
    begin
      instr_t i;
      logic [7:0] m;
      m = 8'($urandom) | 8'h01;
      for (int r = 0; r < 4; r++) hwrite(HT_SQB, 0, HOST_W'({8'(r), 8'(7 - r)}));
      i = base_instr(MODE_RADT); i.a_base = 40; i.b_base = 40; i.out_base = 34; i.len = 4;
      i.radt_lg = 1; i.lane_mask = 32'(m);
      run(i);
      for (int r = 0; r < 4; r++) begin
        for (int l = 0; l < 8; l++) e32[l] = 0;
        for (int g = 0; g < 4; g++)
          for (int l = 2 * g; l < 2 * g + 2; l++)
            if (m[l]) e32[2 * g] += X[r][l] * Y[7 - r][l];
        check_bb(34 + r, e32, 8'h55, "RADT2");
      end
    end

    // ---------------- 5: 1 x CS SIMD, host-loaded SQB ----------------
    // sparse A (LB word j = column j, lane i = A[i][j]); dense B rows in TB0
    begin
      instr_t i;
      int er [6], ec [6];
      er = '{0, 0, 3, 3, 3, 6}; ec = '{1, 5, 0, 2, 7, 4};
      for (int j = 0; j < 8; j++) for (int r = 0; r < 8; r++) A[r][j] = 8'($urandom % 7) - 8'sd3;
      for (int j = 0; j < 8; j++) begin
        for (int r = 0; r < 8; r++) w8[r] = A[r][j];
        hwrite(HT_LB, 48 + j, pack8(w8));
        for (int l = 0; l < 8; l++) begin B[j][l] = 8'($urandom % 7) - 8'sd3; w8[l] = B[j][l]; end
        hwrite(HT_TB0, 48 + j, pack8(w8));
      end
      for (int e = 0; e < 6; e++) hwrite(HT_SQB, 0, HOST_W'({8'(er[e]), 8'(ec[e])}));
      i = base_instr(MODE_SIMD1); i.a_base = 48; i.b_base = 48; i.out_base = 40; i.len = 6;
      run(i);
      for (int w = 0; w < 3; w++) begin
        int rr;
        rr = (w == 0) ? 0 : (w == 1) ? 3 : 6;
        for (int l = 0; l < 8; l++) begin
          e32[l] = 0;
          for (int e = 0; e < 6; e++) if (er[e] == rr) e32[l] += A[rr][ec[e]] * B[ec[e]][l];
        end
        check_bb(40 + w, e32, 8'hff, "SIMD1");
      end
    end

    // ---------------- 6: normal SIMD ----------------
    for (int n = 0; n < 4; n++) begin
      for (int l = 0; l < 8; l++) begin X[n][l] = 8'($urandom); Y[n][l] = 8'($urandom); end
      for (int l = 0; l < 8; l++) w8[l] = X[n][l];
      hwrite(HT_TB1, 50 + n, pack8(w8));
      for (int l = 0; l < 8; l++) w8[l] = Y[n][l];
      hwrite(HT_TB0, 50 + n, pack8(w8));
    end
    for (int add = 0; add < 2; add++) begin
      instr_t i;
      i = base_instr(MODE_SIMDN); i.a_base = 50; i.b_base = 50; i.out_base = 44 + 4 * add; i.len = 4;
      i.elt_add = add[0]; i.in_shift = add ? 5'd0 : 5'd6;
      run(i);
      for (int n = 0; n < 4; n++) begin
        for (int l = 0; l < 8; l++) e32[l] = add ? X[n][l] + Y[n][l] : X[n][l] * Y[n][l];
        check_bb(44 + 4 * add + n, e32, 8'hff, add ? "SIMDN add" : "SIMDN mul", add ? 0 : 6);
      end
    end
    begin   // ELU on small differences: y = elu(x) in Q7.8, out_shift 5 -> x / 32
      instr_t i;
      logic [CS*8-1:0] d;
      i = base_instr(MODE_SIMDN); i.a_base = 50; i.b_base = 50; i.out_base = 52; i.len = 1;
      i.elt_add = 1; i.act = ACT_ELU; i.out_shift = 4'd1;
      run(i);
      hread_bb(52, d);
      for (int l = 0; l < 8; l++) begin
        real x, ey;
        x = real'(int'(X[0][l]) + int'(Y[0][l])) / 256.0;
        ey = (x >= 0.0 ? x : $exp(x) - 1.0) * 128.0;
        if (ey > 127.0) ey = 127.0;
        checks++;
        if (real'($signed(d[l*8 +: 8])) - ey > 4.5 || ey - real'($signed(d[l*8 +: 8])) > 4.5) begin
          failures++; $display("FAIL ELU lane %0d got %0d exp %f", l, $signed(d[l*8 +: 8]), ey);
        end
      end
    end

    // ---------------- 7: IMPORT from upstream, then forward ----------------
    fork
      begin
        instr_t i;
        i = base_instr(MODE_IMPORT); i.out_base = 56; i.len = 4; i.imp_dst = BUF_TB1;
        run(i);
      end
      begin
        for (int n = 0; n < 4; n++) begin
          for (int l = 0; l < 8; l++) X[n][l] = 8'($urandom % 31) - 8'sd15;
          repeat ($urandom % 4) @(negedge clk);
          @(negedge clk);
          up_valid = 1;
          for (int l = 0; l < 8; l++) up_data[l*8 +: 8] = X[n][l];
          @(posedge clk);
          while (!up_pop) @(posedge clk);
          @(negedge clk); up_valid = 0;
        end
      end
    join
    for (int n = 0; n < 4; n++) begin
      for (int l = 0; l < 8; l++) begin Y[n][l] = 8'($urandom % 31) - 8'sd15; w8[l] = Y[n][l]; end
      hwrite(HT_TB0, 56 + n, pack8(w8));
    end
    fwd_q.delete();
    begin
      instr_t i;
      i = base_instr(MODE_SIMDN); i.a_base = 56; i.b_base = 56; i.out_base = 56; i.len = 4;
      i.elt_add = 1; i.fwd = 1;
      run(i);
    end
    checks++;
    if (fwd_q.size() != 4) begin failures++; $display("FAIL forwarded %0d words", fwd_q.size()); end
    for (int n = 0; n < 4; n++) begin
      logic [CS*8-1:0] d;
      for (int l = 0; l < 8; l++) e32[l] = X[n][l] + Y[n][l];
      check_bb(56 + n, e32, 8'hff, "IMPORT");
      hread_bb(56 + n, d);
      checks++;
      if (fwd_q.size() > n && fwd_q[n] != d) begin failures++; $display("FAIL forward word %0d", n); end
    end

    // ---------------- 8: dependency tags ----------------
    begin
      instr_t i;
      int d0, seen_tags;
      i = base_instr(MODE_SIMDN); i.a_base = 50; i.b_base = 50; i.out_base = 60; i.len = 1;
      i.wait_tags = 16'h0004; i.done_tags = 16'h0030;
      d0 = ndone;
      hwrite(HT_INSTR, 0, HOST_W'(i));
      repeat (40) @(posedge clk);
      checks++;
      if (busy || ndone != d0) begin failures++; $display("FAIL started before its flag"); end
      @(negedge clk); flags = 16'h0004;
      seen_tags = 0;
      while (ndone == d0) begin @(posedge clk); if (done && done_tags == 16'h0030) seen_tags = 1; end
      checks++;
      if (!seen_tags) begin failures++; $display("FAIL done_tags"); end
    end

    checks++;
    if (n_mode_switch == 0 || n_dep_wait == 0 || n_pruned_words == 0) begin
      failures++; $display("FAIL counters %0d %0d %0d", n_mode_switch, n_dep_wait, n_pruned_words);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
