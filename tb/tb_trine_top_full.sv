// tb_trine_top_full: the top at its default size (2 x 2 RPUs of 32 x 32 PEs,
// top-k up to 256, 512-word buffers), taken through one complete operation:
// RPU0 computes a 32 x 32 score block C = A * B (K = 16) in output-stationary
// mode with the two-stage top-k unit keeping the 40 largest scores, whose
// positions go into its SQB; a second block then computes, in RADT mode, the
// 40 sampled dot products X[i] . Y[j] at those positions. The test reads both
// results back over the host port and compares them with a reference model.
// C is built so that its values are distinct: C[i][j] = 32 * pi[i] + pj[j]
// scaled into the int8 output by in_shift, with A = [pi, 1], B = [32; pj].
module tb_trine_top_full;
  import trine_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic h_valid, h_ready, h_we, h_rvalid;
  logic [1:0] h_rpu;
  host_tgt_e h_tgt;
  logic [ADDR_W-1:0] h_addr;
  logic [HOST_W-1:0] h_wdata, h_rdata;
  logic [3:0] rpu_busy;
  logic [NTAGS-1:0] flags;
  logic [15:0] n_mode_switch [4], n_tk_stall [4], n_dep_wait [4], n_topk_groups [4], n_irb_words [4];

  trine_top dut (.*);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic hwrite(input int r, input host_tgt_e t, input int a, input logic [HOST_W-1:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 1; h_rpu = 2'(r); h_tgt = t; h_addr = ADDR_W'(a); h_wdata = d;
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk); h_valid = 0;
  endtask

  task automatic hread_bb(input int r, input int a, output logic [255:0] d);
    @(negedge clk);
    h_valid = 1; h_we = 0; h_rpu = 2'(r); h_tgt = HT_BB; h_addr = ADDR_W'(a);
    @(negedge clk); h_valid = 0;
    d = h_rdata[255:0];
  endtask

  int pi [32], pj [32];
  logic signed [7:0] X [32][32], Y [32][32];
  logic [HOST_W-1:0] wd;

  initial begin
    h_valid = 0; h_we = 0; h_rpu = 0; h_tgt = HT_LB; h_addr = 0; h_wdata = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 32; n++) begin pi[n] = n; pj[n] = n; end
    for (int n = 31; n > 0; n--) begin
      int r, t;
      r = $urandom % (n + 1); t = pi[n]; pi[n] = pi[r]; pi[r] = t;
      r = $urandom % (n + 1); t = pj[n]; pj[n] = pj[r]; pj[r] = t;
    end
    // K = 16: column 0 of A = pi, column 1 = 1, the rest 0; row 0 of B = 32, row 1 = pj
    for (int k = 0; k < 16; k++) begin
      wd = '0;
      for (int i = 0; i < 32; i++) wd[i*8 +: 8] = (k == 0) ? 8'(pi[i]) : (k == 1) ? 8'd1 : 8'd0;
      hwrite(0, HT_LB, k, wd);
      wd = '0;
      for (int j = 0; j < 32; j++) wd[j*8 +: 8] = (k == 0) ? 8'd32 : (k == 1) ? 8'(pj[j]) : 8'd0;
      hwrite(0, HT_TB0, k, wd);
    end
    for (int n = 0; n < 32; n++) begin
      wd = '0;
      for (int l = 0; l < 32; l++) begin X[n][l] = 8'($urandom % 5) - 8'sd2; wd[l*8 +: 8] = X[n][l]; end
      hwrite(0, HT_TB1, 32 + n, wd);
      wd = '0;
      for (int l = 0; l < 32; l++) begin Y[n][l] = 8'($urandom % 5) - 8'sd2; wd[l*8 +: 8] = Y[n][l]; end
      hwrite(0, HT_TB0, 32 + n, wd);
    end
    begin
      instr_t i;
      i = '0;
      i.mode = MODE_OS; i.a_base = 0; i.b_base = 0; i.out_base = 0; i.len = 16;
      i.sort_en = 1; i.topk_en = 1; i.topk_k = 40; i.sqb_load = 1; i.in_shift = 5'd3;
      i.lane_mask = '1; i.radt_lg = 3'd5; i.done_tags = 16'h0001;
      hwrite(0, HT_INSTR, 0, HOST_W'(i));
      i = '0;
      i.mode = MODE_RADT; i.a_base = 32; i.b_base = 32; i.out_base = 8; i.len = 40;
      i.lane_mask = '1; i.radt_lg = 3'd5; i.done_tags = 16'h0002;
      hwrite(0, HT_INSTR, 0, HOST_W'(i));
    end
    while (!flags[1]) @(posedge clk);
    // top-k values: 1023 .. 984, >> 3 -> int8 (saturating)
    for (int w = 0; w < 2; w++) begin
      logic [255:0] d;
      hread_bb(0, w, d);
      for (int l = 0; l < 32; l++) begin
        int r;
        logic signed [7:0] ex;
        r = w * 32 + l;
        ex = (r < 40) ? sat8((1023 - r) >>> 3) : 8'sd0;
        checks++;
        if ($signed(d[l*8 +: 8]) != ex) begin
          failures++; $display("FAIL topk word %0d lane %0d got %0d exp %0d", w, l, 8'(d[l*8 +: 8]), ex);
        end
      end
    end
    for (int r = 0; r < 40; r++) begin
      logic [255:0] d;
      int v, ii, jj, s;
      v = 1023 - r;
      for (int n = 0; n < 32; n++) begin
        if (pi[n] == v / 32) ii = n;
        if (pj[n] == v % 32) jj = n;
      end
      s = 0;
      for (int l = 0; l < 32; l++) s += X[ii][l] * Y[jj][l];
      hread_bb(0, 8 + r, d);
      checks++;
      if ($signed(d[7:0]) != sat8(s) || d[255:8] != '0) begin
        failures++; $display("FAIL radt %0d got %0d exp %0d", r, 8'(d[7:0]), s);
      end
    end
    checks++;
    if (n_topk_groups[0] != 1 || n_mode_switch[0] != 1) begin
      failures++; $display("FAIL counters %0d %0d", n_topk_groups[0], n_mode_switch[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
