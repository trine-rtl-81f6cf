// tb_act_unit: random 8-lane Q7.8 words through the activation unit in GELU,
// ELU, softmax and OFF modes, compared two cycles later with real-valued
// functions: GELU x * Phi(x) (tanh form) within 8 LSB, ELU exp(x) - 1 for
// x < 0 within 8 LSB (the unit interpolates a table with 0.5 steps), softmax over the valid lanes of a word within 3% plus
// 2 LSB (invalid lanes must give 0), OFF exact.
module tb_act_unit;
  import trine_pkg::*;
  localparam int N = 8, LAT = 2, NW = 800;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  act_mode_e mode;
  logic in_valid, out_valid;
  logic [N-1:0] in_lane_valid;
  logic signed [15:0] in_x [N], out_y [N];

  act_unit #(.N(N)) dut (.*);

  initial begin
    repeat (3 * NW + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real tanh_r(input real x);
    return ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
  endfunction

  real exp_y [$][N];
  real e [N];
  int nout = 0, nin = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < N; l++) begin
      real ey, got, tol;
      ey  = exp_y[0][l];
      got = real'(out_y[l]);
      unique case (mode)
        ACT_GELU:    tol = 8.0;
        ACT_ELU:     tol = 8.0;
        ACT_SOFTMAX: tol = 0.03 * ey + 2.0;
        default:     tol = 0.01;
      endcase
      checks++;
      if (got - ey > tol || ey - got > tol) begin
        failures++; $display("FAIL word %0d lane %0d mode %0d got %0d exp %f", nout, l, mode, out_y[l], ey);
      end
    end
    void'(exp_y.pop_front());
    nout++;
  end

  initial begin
    in_valid = 0; in_lane_valid = '1; mode = ACT_OFF;
    for (int l = 0; l < N; l++) in_x[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      mode = act_mode_e'(m);
      for (int w = 0; w < NW / 4; w++) begin
        real sum, mx;
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        in_lane_valid = (mode == ACT_SOFTMAX && $urandom % 3 == 0) ? (N'($urandom) | N'(1)) : '1;
        for (int l = 0; l < N; l++) in_x[l] = 16'($urandom % 3072) - 16'sd1536;   // -6 .. 6
        sum = 0.0; mx = -1.0e9;
        for (int l = 0; l < N; l++) if (in_lane_valid[l] && in_x[l] > mx) mx = in_x[l];
        for (int l = 0; l < N; l++) if (in_lane_valid[l]) sum += $exp((real'(in_x[l]) - mx) / 256.0);
        for (int l = 0; l < N; l++) begin
          real x;
          x = real'(in_x[l]) / 256.0;
          unique case (mode)
            ACT_GELU: e[l] = 256.0 * 0.5 * x * (1.0 + tanh_r(0.7978845608 * (x + 0.044715 * x * x * x)));
            ACT_ELU:  e[l] = 256.0 * ((x >= 0.0) ? x : $exp(x) - 1.0);
            ACT_SOFTMAX: e[l] = in_lane_valid[l] ? 256.0 * $exp((real'(in_x[l]) - mx) / 256.0) / sum : 0.0;
            default:  e[l] = real'(in_x[l]);
          endcase
        end
        if (in_valid) begin exp_y.push_back(e); nin++; end
      end
      @(negedge clk); in_valid = 0;
      repeat (LAT + 2) @(posedge clk);
    end
    checks++;
    if (nout != nin) begin failures++; $display("FAIL words %0d/%0d", nout, nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
