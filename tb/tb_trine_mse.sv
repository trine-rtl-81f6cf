// tb_trine_mse: self-checking test of the mode-switchable engine at 8 x 8.
// Each mode is driven directly (the test does the skewing a feed scheduler
// would do) and checked against matrix products computed in the test:
//   OS   C = A(8xK) * B(Kx8), drained and shifted out row RS-1 first;
//   WS   Y = X(Mx8) * W(8x8), column j of vector t at cycle t + RS + j;
//   1xCS acc += a * B row, drained from row 0;
//   RADT group sums of lane products for P = 2, 4, 8 with random lane masks,
//        latency log2(CS)+1;
//   SIMD element-wise multiply and add, latency 1.
module tb_trine_mse;
  import trine_pkg::*;
  localparam int RS = 8, CS = 8, LG = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mse_mode_e mode;
  logic compute, load_w, drain, shift, clr, elt_add;
  logic [2:0] radt_lg;
  logic [CS-1:0] lane_mask;
  logic signed [7:0] a_west [RS];
  logic signed [7:0] b_north [CS];
  logic signed [7:0] x_col [CS];
  logic signed [7:0] x_bcast;
  logic signed [31:0] col_out [CS];

  trine_mse #(.RS(RS), .CS(CS)) dut (
    .clk, .rst_n, .en(1'b1), .mode, .compute, .load_w, .drain, .shift, .clr, .elt_add,
    .radt_lg, .lane_mask, .a_west, .b_north, .x_col, .x_bcast, .col_out);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_inputs();
    compute = 0; load_w = 0; drain = 0; shift = 0; clr = 0; elt_add = 0; x_bcast = 0;
    for (int i = 0; i < RS; i++) a_west[i] = 0;
    for (int j = 0; j < CS; j++) begin b_north[j] = 0; x_col[j] = 0; end
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic signed [7:0]  A [RS][16];
  logic signed [7:0]  B [16][CS];
  logic signed [7:0]  W [RS][CS];
  logic signed [7:0]  X [16][RS];
  int                 C [RS][CS];
  int                 hist [64][CS];

  initial begin
    idle_inputs();
    mode = MODE_OS; radt_lg = 0; lane_mask = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- OS ----------------
    begin
      int K;
      K = 12;
      for (int i = 0; i < RS; i++) for (int k = 0; k < K; k++) A[i][k] = 8'($urandom);
      for (int k = 0; k < K; k++) for (int j = 0; j < CS; j++) B[k][j] = 8'($urandom);
      mode = MODE_OS;
      clr = 1; tick(); clr = 0;
      for (int c = 0; c < K + RS + CS; c++) begin
        compute = 1;
        for (int i = 0; i < RS; i++) a_west[i] = (c - i >= 0 && c - i < K) ? A[i][c-i] : 8'sd0;
        for (int j = 0; j < CS; j++) b_north[j] = (c - j >= 0 && c - j < K) ? B[c-j][j] : 8'sd0;
        tick();
      end
      idle_inputs();
      for (int d = 0; d < RS; d++) begin
        drain = (d == 0); shift = (d != 0); tick();
        for (int j = 0; j < CS; j++) begin
          int ref_v;
          ref_v = 0;
          for (int k = 0; k < K; k++) ref_v += A[RS-1-d][k] * B[k][j];
          check("OS C", col_out[j], ref_v);
        end
      end
      drain = 0; shift = 0;
    end

    // ---------------- WS ----------------
    begin
      int M;
      M = 10;
      mode = MODE_WS;
      for (int i = 0; i < RS; i++) for (int j = 0; j < CS; j++) W[i][j] = 8'($urandom);
      for (int t = 0; t < M; t++) for (int i = 0; i < RS; i++) X[t][i] = 8'($urandom);
      for (int t = 0; t < RS; t++) begin
        load_w = 1;
        for (int j = 0; j < CS; j++) b_north[j] = W[RS-1-t][j];
        tick();
      end
      idle_inputs();
      for (int c = 0; c < 40; c++) begin
        compute = 1;
        for (int i = 0; i < RS; i++) a_west[i] = (c - i >= 0 && c - i < M) ? X[c-i][i] : 8'sd0;
        tick();
        for (int j = 0; j < CS; j++) hist[c][j] = col_out[j];
      end
      idle_inputs();
      // col j of vector t is visible after the edge ending cycle t+RS-1+j
      for (int t = 0; t < M; t++)
        for (int j = 0; j < CS; j++) begin
          int ref_v;
          ref_v = 0;
          for (int i = 0; i < RS; i++) ref_v += X[t][i] * W[i][j];
          check("WS Y", hist[t + RS - 1 + j][j], ref_v);
        end
    end

    // ---------------- 1 x CS SIMD ----------------
    mode = MODE_SIMD1;
    for (int rep = 0; rep < 4; rep++) begin
      int acc [CS];
      int n;
      n = 1 + $urandom % 12;
      for (int j = 0; j < CS; j++) acc[j] = 0;
      for (int t = 0; t < n; t++) begin
        compute = 1;
        x_bcast = 8'($urandom);
        for (int j = 0; j < CS; j++) begin
          b_north[j] = 8'($urandom);
          acc[j] += x_bcast * b_north[j];
        end
        tick();
      end
      idle_inputs();
      drain = 1; tick(); drain = 0;
      for (int j = 0; j < CS; j++) check("SIMD1 row", col_out[j], acc[j]);
    end

    // ---------------- RADT ----------------
    mode = MODE_RADT;
    for (int rep = 0; rep < 12; rep++) begin
      int P, sums [CS];
      radt_lg   = 3'(1 + rep % 3);
      P         = 1 << radt_lg;
      lane_mask = CS'($urandom);
      compute   = 1;
      for (int j = 0; j < CS; j++) begin
        x_col[j] = 8'($urandom); b_north[j] = 8'($urandom);
      end
      for (int g = 0; g < CS; g += P) begin
        sums[g] = 0;
        for (int j = g; j < g + P; j++) if (lane_mask[j]) sums[g] += x_col[j] * b_north[j];
      end
      tick();
      idle_inputs();
      repeat (LG) tick();
      for (int g = 0; g < CS; g += P) check("RADT group sum", col_out[g], sums[g]);
    end

    // ---------------- normal SIMD ----------------
    mode = MODE_SIMDN;
    for (int rep = 0; rep < 8; rep++) begin
      compute = 1;
      elt_add = rep[0];
      for (int j = 0; j < CS; j++) begin
        x_col[j] = 8'($urandom); b_north[j] = 8'($urandom);
      end
      tick();
      for (int j = 0; j < CS; j++)
        check("SIMD elementwise", col_out[j],
              elt_add ? int'(x_col[j]) + int'(b_north[j]) : int'(x_col[j]) * int'(b_north[j]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
