// tb_norm_unit: feeds random 8-lane Q7.8 words (one per cycle, random gaps)
// through the normalization unit in LN, BN and OFF modes with random per-lane
// gamma/beta, and compares each output, three cycles later, with a real-valued
// model: LN y = (x - mean) / sigma * gamma + beta, BN y = x * scale + beta,
// OFF y = x. LN is allowed 3% of |y| plus 4 LSB (the unit uses an integer
// square root and a reciprocal), BN and OFF must be within 1 LSB.
module tb_norm_unit;
  import trine_pkg::*;
  localparam int N = 8, LAT = 3, NW = 600;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  norm_mode_e mode;
  logic in_valid, out_valid;
  logic signed [15:0] in_x [N], param_scale [N], param_bias [N], out_y [N];

  norm_unit #(.N(N)) dut (.*);

  initial begin
    repeat (3 * NW + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  real exp_y [$][N];
  real e [N];
  int nout = 0, nin = 0;

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < N; l++) begin
      real ey, got, tol;
      ey  = exp_y[0][l];
      got = real'(out_y[l]);
      if (ey > 32767.0) ey = 32767.0;
      if (ey < -32768.0) ey = -32768.0;
      tol = (mode == NORM_LN) ? 0.03 * (ey < 0 ? -ey : ey) + 4.0 : 1.01;
      checks++;
      if (got - ey > tol || ey - got > tol) begin
        failures++; $display("FAIL word %0d lane %0d mode %0d got %0d exp %f", nout, l, mode, out_y[l], ey);
      end
    end
    void'(exp_y.pop_front());
    nout++;
  end

  initial begin
    in_valid = 0;
    mode = NORM_LN;
    for (int l = 0; l < N; l++) begin in_x[l] = 0; param_scale[l] = 256; param_bias[l] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = (m == 0) ? NORM_LN : (m == 1) ? NORM_BN : NORM_OFF;
      for (int l = 0; l < N; l++) begin
        param_scale[l] = 16'($urandom % 512) - 16'sd128;
        param_bias[l]  = 16'($urandom % 512) - 16'sd256;
      end
      for (int w = 0; w < NW / 3; w++) begin
        real mean, vr, sd;
        int spread;
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        spread = 512 + $urandom % 2048;      // sigma at least about 1.0
        mean = 0.0;
        for (int l = 0; l < N; l++) begin
          in_x[l] = 16'($urandom % spread) - 16'(spread / 2) + 16'($urandom % 512) - 16'sd256;
          if (l == 0) in_x[l] = in_x[l] + 16'sd600;
          mean += real'(in_x[l]);
        end
        mean /= N;
        vr = 0.0;
        for (int l = 0; l < N; l++) vr += (real'(in_x[l]) - mean) ** 2;
        sd = $sqrt(vr / N);
        for (int l = 0; l < N; l++) begin
          unique case (mode)
            NORM_LN: e[l] = (real'(in_x[l]) - mean) / sd * 256.0 * real'(param_scale[l]) / 256.0 + real'(param_bias[l]);
            NORM_BN: e[l] = real'(in_x[l]) * real'(param_scale[l]) / 256.0 + real'(param_bias[l]);
            default: e[l] = real'(in_x[l]);
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
