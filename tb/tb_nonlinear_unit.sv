// tb_nonlinear_unit: random int32 words through the full requantize ->
// normalize -> activate -> int8 chain (8 lanes). Checks the 7-cycle latency,
// that lane_valid and last travel with the data, and the int8 results:
// exact in OFF/OFF mode (saturating shifts only), and against a real-valued
// batch-norm + GELU model (within 2 int8 LSB) in BN/GELU mode.
module tb_nonlinear_unit;
  import trine_pkg::*;
  localparam int N = 8, LAT = 7, NW = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [4:0] in_shift;
  norm_mode_e norm_mode;
  act_mode_e act_mode;
  logic [3:0] out_shift;
  logic signed [15:0] param_scale [N], param_bias [N];
  logic in_valid, in_last, out_valid, out_last;
  logic [N-1:0] in_lane_valid, out_lane_valid;
  logic signed [31:0] in_v [N];
  logic signed [7:0] out_q [N];

  nonlinear_unit #(.N(N)) dut (.*);

  initial begin
    repeat (3 * NW + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  real exp_q [$][N];
  logic [N-1:0] exp_lv [$];
  logic exp_last [$];
  int exp_cyc [$];
  real e [N];
  int cyc = 0, nout = 0, nin = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real tanh_r(input real x);
    return ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cyc - exp_cyc[0] != LAT || out_lane_valid != exp_lv[0] || out_last != exp_last[0]) begin
      failures++; $display("FAIL word %0d side info lat=%0d", nout, cyc - exp_cyc[0]);
    end
    for (int l = 0; l < N; l++) begin
      real d;
      d = real'(out_q[l]) - exp_q[0][l];
      checks++;
      if (d > ((norm_mode == NORM_OFF) ? 0.01 : 2.0) || d < ((norm_mode == NORM_OFF) ? -0.01 : -2.0)) begin
        failures++; $display("FAIL word %0d lane %0d got %0d exp %f", nout, l, out_q[l], exp_q[0][l]);
      end
    end
    void'(exp_q.pop_front()); void'(exp_lv.pop_front()); void'(exp_last.pop_front()); void'(exp_cyc.pop_front());
    nout++;
  end

  initial begin
    in_valid = 0; in_last = 0; in_lane_valid = '1; in_shift = 0; out_shift = 0;
    norm_mode = NORM_OFF; act_mode = ACT_OFF;
    for (int l = 0; l < N; l++) begin in_v[l] = 0; param_scale[l] = 256; param_bias[l] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      norm_mode = m ? NORM_BN : NORM_OFF;
      act_mode  = m ? ACT_GELU : ACT_OFF;
      in_shift  = m ? 5'd4 : 5'($urandom % 8);
      out_shift = m ? 4'd4 : 4'($urandom % 8);
      for (int l = 0; l < N; l++) begin
        param_scale[l] = 16'($urandom % 512);
        param_bias[l]  = 16'($urandom % 256) - 16'sd128;
      end
      for (int w = 0; w < NW / 2; w++) begin
        @(negedge clk);
        in_valid = ($urandom % 3) != 0;
        in_last  = ($urandom % 4) == 0;
        in_lane_valid = N'($urandom);
        for (int l = 0; l < N; l++) begin
          logic signed [31:0] x;
          in_v[l] = m ? 32'($urandom % 40000) - 32'sd20000 : 32'($urandom % 400000) - 32'sd200000;
          x = 32'(sat_fx(48'(in_v[l] >>> in_shift)));
          if (m == 0) e[l] = real'(sat8(x >>> out_shift));
          else begin
            real y, xr;
            y  = real'(x) * real'(param_scale[l]) / 256.0 + real'(param_bias[l]);
            xr = y / 256.0;
            y  = 256.0 * 0.5 * xr * (1.0 + tanh_r(0.7978845608 * (xr + 0.044715 * xr * xr * xr)));
            y  = y / 16.0;
            if (y > 127.0) y = 127.0;
            if (y < -128.0) y = -128.0;
            e[l] = y;
          end
        end
        if (in_valid) begin
          exp_q.push_back(e); exp_lv.push_back(in_lane_valid); exp_last.push_back(in_last);
          exp_cyc.push_back(cyc); nin++;
        end
      end
      @(negedge clk); in_valid = 0;
      repeat (LAT + 3) @(posedge clk);
    end
    checks++;
    if (nout != nin) begin failures++; $display("FAIL words %0d/%0d", nout, nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
