// tb_feed_skew: checks the delay insertion of the feed scheduler: lane i of a
// word must come out exactly i cycles later (N-1-i when REVERSE), with zeros
// and a low valid for lanes that carried no data.
module tb_feed_skew;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 8;

  logic [7:0] in_vec [N];
  logic       in_valid;
  logic [7:0] f_out [N], r_out [N];
  logic [N-1:0] f_v, r_v;

  feed_skew #(.N(N), .W(8), .REVERSE(1'b0)) dut_f (
    .clk, .rst_n, .en(1'b1), .in_vec, .in_valid, .out_vec(f_out), .out_valid(f_v));
  feed_skew #(.N(N), .W(8), .REVERSE(1'b1)) dut_r (
    .clk, .rst_n, .en(1'b1), .in_vec, .in_valid, .out_vec(r_out), .out_valid(r_v));

  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0] hist [64][N];
  logic       hv   [64];

  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) in_vec[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      hv[t] = ($urandom % 4) != 0 && t < 48;
      for (int i = 0; i < N; i++) hist[t][i] = 8'($urandom);
      in_valid = hv[t];
      for (int i = 0; i < N; i++) in_vec[i] = hist[t][i];
      #1;
      // outputs visible now correspond to input of cycle t - delay
      for (int i = 0; i < N; i++) begin
        int df, dr;
        df = i; dr = N - 1 - i;
        if (t - df >= 0) begin
          checks++;
          if (f_v[i] !== hv[t-df] || f_out[i] !== (hv[t-df] ? hist[t-df][i] : 8'd0)) begin
            failures++; $display("FAIL fwd lane %0d t %0d", i, t);
          end
        end
        if (t - dr >= 0) begin
          checks++;
          if (r_v[i] !== hv[t-dr] || r_out[i] !== (hv[t-dr] ? hist[t-dr][i] : 8'd0)) begin
            failures++; $display("FAIL rev lane %0d t %0d", i, t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
