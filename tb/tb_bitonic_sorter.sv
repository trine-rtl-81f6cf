// tb_bitonic_sorter: streams random words (one per cycle, with gaps and some
// invalid lanes) through the 8-lane sorter and checks that each word leaves
// exactly LAT = 6 cycles later, sorted descending with invalid lanes last, and
// that the (key, payload) pairs are a permutation of the input.
module tb_bitonic_sorter;
  localparam int N = 8, LAT = 6, NW = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [N-1:0] in_lv, out_lv;
  logic signed [15:0] in_key [N], out_key [N];
  logic [7:0] in_pay [N], out_pay [N];

  bitonic_sorter #(.N(N), .KW(16), .PW(8)) dut (
    .clk, .rst_n, .en(1'b1), .in_valid, .in_lane_valid(in_lv), .in_key, .in_payload(in_pay),
    .out_valid, .out_lane_valid(out_lv), .out_key, .out_payload(out_pay));

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic              sv [NW];
  logic [N-1:0]      slv [NW];
  logic signed [15:0] sk [NW][N];
  int                cyc_in [NW];
  int cyc = 0, nin = 0, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; in_lv = 0;
    for (int l = 0; l < N; l++) begin in_key[l] = 0; in_pay[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (nin < NW) begin
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      in_lv    = ($urandom % 3 == 0) ? N'($urandom) : '1;
      for (int l = 0; l < N; l++) begin
        in_key[l] = 16'($urandom % 64) - 16'sd32;   // many ties
        in_pay[l] = 8'(l);
      end
      if (in_valid) begin
        slv[nin] = in_lv;
        for (int l = 0; l < N; l++) sk[nin][l] = in_key[l];
        cyc_in[nin] = cyc;
        nin++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    checks++;
    if (nout != NW) begin failures++; $display("FAIL words out %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int nvalid, used [N];
    // latency
    checks++;
    if (cyc - cyc_in[nout] != LAT) begin
      failures++; $display("FAIL latency %0d", cyc - cyc_in[nout]);
    end
    nvalid = 0;
    for (int l = 0; l < N; l++) if (slv[nout][l]) nvalid++;
    for (int l = 0; l < N; l++) begin
      checks++;
      if (out_lv[l] != (l < nvalid)) begin failures++; $display("FAIL valid order word %0d", nout); end
      if (l > 0 && out_lv[l] && out_key[l] > out_key[l-1]) begin
        failures++; $display("FAIL not descending word %0d", nout);
      end
    end
    // permutation: each valid output payload points at an unused valid input lane with that key
    for (int l = 0; l < N; l++) used[l] = 0;
    for (int l = 0; l < nvalid; l++) begin
      int p;
      p = int'(out_pay[l]);
      checks++;
      if (!slv[nout][p] || used[p] != 0 || sk[nout][p] != out_key[l]) begin
        failures++; $display("FAIL payload word %0d lane %0d", nout, l);
      end
      used[p] = 1;
    end
    nout++;
  end
endmodule
