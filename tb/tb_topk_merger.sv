// tb_topk_merger: drives groups of pre-sorted 8-lane words into an
// 8-lane, KMAX = 32 merger with random k (1..32), random group length,
// invalid lanes, an optional threshold and random input gaps. A reference
// model keeps every valid (key, id) of the group; after the group the emitted
// words must hold exactly the min(k, valid) largest keys in descending order,
// each payload naming a distinct input element with that key.
module tb_topk_merger;
  localparam int N = 8, KMAX = 32, NG = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0] k;
  logic thr_en;
  logic signed [15:0] thr;
  logic in_valid, in_ready, in_first, in_last;
  logic [N-1:0] in_lv, out_lv;
  logic signed [15:0] in_key [N], out_key [N];
  logic [7:0] in_pay [N], out_pay [N];
  logic out_valid, out_last;

  topk_merger #(.N(N), .KMAX(KMAX), .KW(16), .PW(8)) dut (
    .clk, .rst_n, .k, .thr_en, .thr, .in_valid, .in_ready, .in_first, .in_last,
    .in_lane_valid(in_lv), .in_key, .in_payload(in_pay),
    .out_valid, .out_last, .out_lane_valid(out_lv), .out_key, .out_payload(out_pay));

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference: all valid (key) of the group indexed by id
  logic signed [15:0] id_key [256];
  logic               id_ok  [256];
  int                 nref;
  logic signed [15:0] ref_sorted [256];

  task automatic sort_ref();
    nref = 0;
    for (int i = 0; i < 256; i++) if (id_ok[i]) begin ref_sorted[nref] = id_key[i]; nref++; end
    for (int i = 1; i < nref; i++)
      for (int j = i; j > 0 && ref_sorted[j] > ref_sorted[j-1]; j--) begin
        logic signed [15:0] t; t = ref_sorted[j]; ref_sorted[j] = ref_sorted[j-1]; ref_sorted[j-1] = t;
      end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_lv = 0; k = 1; thr_en = 0; thr = 0;
    for (int l = 0; l < N; l++) begin in_key[l] = 0; in_pay[l] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      int nw, got, used [256];
      logic signed [15:0] w [N];
      nw = 1 + $urandom % 12;
      k = 6'(1 + $urandom % KMAX);
      thr_en = ($urandom % 4) == 0;
      thr = 16'($urandom % 40) - 16'sd20;
      for (int i = 0; i < 256; i++) begin id_ok[i] = 0; used[i] = 0; end
      for (int wd = 0; wd < nw; wd++) begin
        int nv;
        nv = ($urandom % 4 == 0) ? int'($urandom % (N + 1)) : N;
        for (int l = 0; l < N; l++) w[l] = 16'($urandom % 100) - 16'sd50;
        for (int i = 1; i < N; i++)
          for (int j = i; j > 0 && w[j] > w[j-1]; j--) begin
            logic signed [15:0] t; t = w[j]; w[j] = w[j-1]; w[j-1] = t;
          end
        while ($urandom % 3 == 0) begin @(negedge clk); in_valid = 0; @(posedge clk); end
        @(negedge clk);
        in_valid = 1; in_first = (wd == 0); in_last = (wd == nw - 1);
        for (int l = 0; l < N; l++) begin
          in_lv[l] = (l < nv); in_key[l] = w[l]; in_pay[l] = 8'(wd * N + l);
          id_key[wd * N + l] = w[l];
          id_ok[wd * N + l]  = (l < nv) && (!thr_en || w[l] >= thr);
        end
        @(posedge clk);
        checks++;
        if (!in_ready) begin failures++; $display("FAIL not ready during group"); end
      end
      @(negedge clk); in_valid = 0;
      sort_ref();
      // collect output words
      got = 0;
      for (int e = 0; e < (int'(k) + N - 1) / N; e++) begin
        @(posedge clk);
        checks++;
        if (!out_valid || in_ready || out_last != (e == (int'(k) + N - 1) / N - 1)) begin
          failures++; $display("FAIL emit handshake g%0d e%0d", g, e);
        end
        for (int l = 0; l < N; l++) begin
          int r; r = e * N + l;
          checks++;
          if (r < int'(k) && r < nref) begin
            if (!out_lv[l] || out_key[l] != ref_sorted[r] || !id_ok[out_pay[l]] ||
                id_key[out_pay[l]] != out_key[l] || used[out_pay[l]] != 0) begin
              failures++;
              $display("FAIL g%0d r%0d lv=%0b key=%0d exp=%0d", g, r, out_lv[l], out_key[l], ref_sorted[r]);
            end
            used[out_pay[l]] = 1;
            got++;
          end else if (out_lv[l]) begin
            failures++; $display("FAIL g%0d r%0d extra lane", g, r);
          end
        end
      end
      @(posedge clk);
      checks++;
      if (out_valid || !in_ready) begin failures++; $display("FAIL emit too long g%0d", g); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
