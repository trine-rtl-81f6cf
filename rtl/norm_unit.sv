// norm_unit: layer / batch normalization on one word of N lanes (Q7.8).
//
// The paper lists layer and batch normalization among the compact nonlinear
// units, built from simple approximations and a tree-style accumulation, but
// gives no detail; the arithmetic below is this design's own.
//   NORM_LN: mean = sum(x)/N, d = x - mean, var = sum(d*d)/N (tree sums),
//            s = isqrt(var) (Q.8), r = 2^16 / max(s,1) (1/sigma in Q.8),
//            y = ((d*r) >>> 8) * gamma >>> 8 + beta
//            (LayerNorm across the N lanes of a word; N must be a power of two).
//   NORM_BN: y = (x * scale) >>> 8 + bias (batch norm folded into a per-lane
//            affine map, scale = gamma/sigma, bias = beta - mean*scale).
//   NORM_OFF: y = x.
// gamma/scale and beta/bias come per lane from param_scale / param_bias (Q7.8).
// All results saturate to 16 bits.
// Timing: a 3-stage pipeline, LAT = 3 cycles for every mode; one word per cycle.
module norm_unit
  import trine_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  norm_mode_e             mode,
  input  logic                   in_valid,
  input  logic signed [FX_W-1:0] in_x [N],
  input  logic signed [FX_W-1:0] param_scale [N],
  input  logic signed [FX_W-1:0] param_bias  [N],
  output logic                   out_valid,
  output logic signed [FX_W-1:0] out_y [N]
);

  localparam int unsigned LGN = (N > 1) ? $clog2(N) : 1;

  function automatic logic [15:0] isqrt32(input logic [31:0] v);
    logic [31:0] rem;
    logic [15:0] root;
    logic [17:0] trial;
    rem  = '0;
    root = '0;
    for (int b = 15; b >= 0; b--) begin
      rem   = {rem[29:0], v[2*b+1 -: 2]};
      trial = {root, 2'b01};
      if (rem >= 32'(trial)) begin
        rem  = rem - 32'(trial);
        root = {root[14:0], 1'b1};
      end else begin
        root = {root[14:0], 1'b0};
      end
    end
    return root;
  endfunction

  // stage 1: mean
  logic                   v1;
  logic signed [FX_W-1:0] x1 [N];
  logic signed [FX_W-1:0] mean1;
  // stage 2: deviations and variance
  logic                   v2;
  logic signed [FX_W:0]   d2 [N];
  logic [31:0]            var2;
  logic signed [FX_W-1:0] x2 [N];
  // stage 3 output registers
  logic signed [FX_W-1:0] y3 [N];
  logic                   v3;

  logic signed [31:0] sum_c;
  logic [47:0]        sq_c;
  logic [15:0]        s_c;
  logic [16:0]        r_c;

  always_comb begin
    sum_c = '0;
    for (int l = 0; l < N; l++) sum_c += 32'(in_x[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; mean1 <= '0;
      for (int l = 0; l < N; l++) x1[l] <= '0;
    end else begin
      v1    <= in_valid;
      mean1 <= FX_W'(sum_c >>> LGN);
      for (int l = 0; l < N; l++) x1[l] <= in_x[l];
    end
  end

  always_comb begin
    sq_c = '0;
    for (int l = 0; l < N; l++) begin
      logic signed [FX_W:0] d;
      d    = (FX_W+1)'(x1[l]) - (FX_W+1)'(mean1);
      sq_c += 48'(d * d);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; var2 <= '0;
      for (int l = 0; l < N; l++) begin d2[l] <= '0; x2[l] <= '0; end
    end else begin
      v2   <= v1;
      var2 <= (sq_c >> LGN) > 48'hffff_ffff ? 32'hffff_ffff : 32'(sq_c >> LGN);
      for (int l = 0; l < N; l++) begin
        d2[l] <= (FX_W+1)'(x1[l]) - (FX_W+1)'(mean1);
        x2[l] <= x1[l];
      end
    end
  end

  always_comb begin
    s_c = isqrt32(var2);
    r_c = 17'((32'd65536) / ((s_c == 0) ? 32'd1 : 32'(s_c)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0;
      for (int l = 0; l < N; l++) y3[l] <= '0;
    end else begin
      v3 <= v2;
      for (int l = 0; l < N; l++) begin
        logic signed [47:0] t;
        unique case (mode)
          NORM_LN: begin
            t = (48'(d2[l]) * $signed({31'b0, r_c})) >>> FX_FRAC;
            t = 48'(sat_fx(t));
            t = ((t * 48'(param_scale[l])) >>> FX_FRAC) + 48'(param_bias[l]);
          end
          NORM_BN: t = ((48'(x2[l]) * 48'(param_scale[l])) >>> FX_FRAC) + 48'(param_bias[l]);
          default: t = 48'(x2[l]);
        endcase
        y3[l] <= sat_fx(t);
      end
    end
  end

  assign out_valid = v3;
  assign out_y     = y3;

endmodule
