// tb_topk_engine: runs an 8-lane engine (KMAX = 32, CB depth 16) in three
// configurations chosen at random per batch: full top-k (sort + merge),
// sort only, and full bypass. The producer sends batches of selection groups
// with random gaps, honouring in_ready. A monitor records every output word;
// after the engine goes idle each group is compared against a reference:
//   top-k:   min(k, valid) largest values, descending, each pos(i,j) naming a
//            distinct input element holding that value;
//   sort:    each word sorted descending, a permutation of its input;
//   bypass:  words unchanged, pos = (row, col_base + lane).
module tb_topk_engine;
  import trine_pkg::*;
  localparam int N = 8, KMAX = 32, NB = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sort_en, topk_en, thr_en, in_valid, in_ready, in_first, in_last;
  logic [5:0] k;
  logic signed [31:0] thr;
  logic [7:0] in_row, in_col_base;
  logic [N-1:0] in_lv, out_lv;
  logic signed [31:0] in_val [N], out_val [N];
  pos_t out_pos [N];
  logic out_valid, out_last, busy;

  topk_engine #(.N(N), .KMAX(KMAX), .CB_DEPTH(16), .AF_MARGIN(8)) dut (
    .clk, .rst_n, .sort_en, .topk_en, .k, .thr_en, .thr,
    .in_valid, .in_ready, .in_first, .in_last, .in_row, .in_col_base,
    .in_lane_valid(in_lv), .in_val, .out_valid, .out_last, .out_lane_valid(out_lv),
    .out_val, .out_pos, .busy);

  initial begin
    repeat (40000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output capture
  int nout;
  logic signed [31:0] ov [4096][N];
  pos_t op [4096][N];
  logic [N-1:0] olv [4096];
  logic olast [4096];
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < N; l++) begin ov[nout][l] = out_val[l]; op[nout][l] = out_pos[l]; end
    olv[nout] = out_lv; olast[nout] = out_last; nout++;
  end

  // input record: value at (row, col)
  logic signed [31:0] mat [256][256];
  logic               mok [256][256];
  // per-word input record (sort / bypass checks)
  int nin;
  logic signed [31:0] iv [4096][N];
  logic [N-1:0] ilv [4096];
  logic [7:0] irow [4096], icol [4096];

  int ng;
  int g_row [64], g_nw [64];

  task automatic send_word(input int row, input int cb, input logic f, input logic l, input int nv);
    while ($urandom % 4 == 0) @(posedge clk);
    @(negedge clk);
    while (!in_ready) begin @(posedge clk); @(negedge clk); end
    in_valid = 1; in_first = f; in_last = l; in_row = 8'(row); in_col_base = 8'(cb);
    for (int q = 0; q < N; q++) begin
      in_lv[q] = (q < nv) || (nv == N) ? 1'b1 : ($urandom % 2 == 1);
      in_val[q] = 32'($urandom % 200) - 32'sd100;
      mat[row][cb + q] = in_val[q];
      mok[row][cb + q] = in_lv[q] && (!thr_en || in_val[q] >= thr);
      iv[nin][q] = in_val[q];
    end
    ilv[nin] = in_lv; irow[nin] = 8'(row); icol[nin] = 8'(cb); nin++;
    @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_row = 0; in_col_base = 0; in_lv = 0;
    sort_en = 0; topk_en = 0; thr_en = 0; thr = 0; k = 1; nout = 0; nin = 0;
    for (int l = 0; l < N; l++) in_val[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      int cfg, wbase;
      cfg = $urandom % 3;            // 0 top-k, 1 sort only, 2 bypass
      sort_en = (cfg != 2); topk_en = (cfg == 0);
      k = 6'(1 + $urandom % KMAX);
      thr_en = (cfg == 0) && ($urandom % 4 == 0);
      thr = 32'($urandom % 100) - 32'sd50;
      ng = 1 + $urandom % 4;
      nout = 0; nin = 0;
      for (int r = 0; r < 256; r++) for (int c = 0; c < 256; c++) mok[r][c] = 0;
      for (int g = 0; g < ng; g++) begin
        g_row[g] = g; g_nw[g] = 1 + $urandom % 6;
        for (int w = 0; w < g_nw[g]; w++)
          send_word(g, w * N, w == 0, w == g_nw[g] - 1, ($urandom % 3 == 0) ? 0 : N);
      end
      @(posedge clk);
      while (busy) @(posedge clk);
      repeat (2) @(posedge clk);
      // ---- compare ----
      if (cfg == 0) begin
        int o;
        o = 0;
        for (int g = 0; g < ng; g++) begin
          logic signed [31:0] rs [64];
          int nr, nwo, used [64];
          nr = 0;
          for (int c = 0; c < g_nw[g] * N; c++) begin
            used[c] = 0;
            if (mok[g][c]) begin rs[nr] = mat[g][c]; nr++; end
          end
          for (int i = 1; i < nr; i++)
            for (int j = i; j > 0 && rs[j] > rs[j-1]; j--) begin
              logic signed [31:0] t; t = rs[j]; rs[j] = rs[j-1]; rs[j-1] = t;
            end
          nwo = (int'(k) + N - 1) / N;
          for (int e = 0; e < nwo; e++) begin
            checks++;
            if (o + e >= nout || olast[o + e] != (e == nwo - 1)) begin
              failures++; $display("FAIL b%0d g%0d missing/last word %0d", b, g, e);
            end else for (int l = 0; l < N; l++) begin
              int r, c;
              r = e * N + l;
              c = int'(op[o + e][l].col);
              checks++;
              if (r < int'(k) && r < nr) begin
                if (!olv[o + e][l] || ov[o + e][l] != rs[r] || op[o + e][l].row != 8'(g) ||
                    c >= g_nw[g] * N || !mok[g][c] || mat[g][c] != rs[r] || used[c] != 0) begin
                  failures++; $display("FAIL b%0d g%0d r%0d val %0d exp %0d", b, g, r, ov[o + e][l], rs[r]);
                end
                if (c < 64) used[c] = 1;
              end else if (olv[o + e][l]) begin
                failures++; $display("FAIL b%0d g%0d r%0d extra", b, g, r);
              end
            end
          end
          o += nwo;
        end
        checks++;
        if (o != nout) begin failures++; $display("FAIL b%0d word count %0d/%0d", b, nout, o); end
      end else begin
        checks++;
        if (nout != nin) begin failures++; $display("FAIL b%0d cfg%0d words %0d/%0d", b, cfg, nout, nin); end
        for (int w = 0; w < nin && w < nout; w++) begin
          int nv, used [N];
          nv = 0;
          for (int q = 0; q < N; q++) begin used[q] = 0; if (ilv[w][q]) nv++; end
          for (int q = 0; q < N; q++) begin
            checks++;
            if (cfg == 2) begin
              if (olv[w][q] != ilv[w][q] || ov[w][q] != iv[w][q] || op[w][q].row != irow[w] ||
                  op[w][q].col != icol[w] + 8'(q)) begin
                failures++; $display("FAIL b%0d bypass w%0d q%0d", b, w, q);
              end
            end else begin
              int src;
              src = int'(op[w][q].col) - int'(icol[w]);
              if (olv[w][q] != (q < nv)) begin failures++; $display("FAIL b%0d sort lv w%0d", b, w); end
              else if (q < nv) begin
                if (src < 0 || src >= N || !ilv[w][src] || iv[w][src] != ov[w][q] || used[src] != 0 ||
                    (q > 0 && ov[w][q] > ov[w][q-1])) begin
                  failures++; $display("FAIL b%0d sort w%0d q%0d", b, w, q);
                end else used[src] = 1;
              end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
