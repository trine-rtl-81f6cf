// act_unit: GELU, ELU and Softmax on one word of N lanes (Q7.8 in and out).
//
// The paper builds its activation units from polynomial or piecewise-linear
// approximations sized for the array's streaming rate; the tables and the
// arithmetic here are this design's own choices.
//   GELU: linear interpolation in a 17-point table of gelu(x) = x*Phi(x) at
//         x = -4, -3.5, ..., 4 (entry n = round(256*gelu(-4 + n/2)));
//         x < -4 gives 0, x >= 4 gives x.
//   ELU (alpha = 1): x for x >= 0; for -8 <= x < 0 interpolation in a 17-point
//         table of exp(x)-1 at x = -8, -7.5, ..., 0; -1 below -8.
//   Softmax over the valid lanes: z = x - max, u = z*log2(e) (369/256),
//         e = 2^u = (2^frac(u), a 9-point table of round(32768*2^(n/8)),
//         interpolated) >> -floor(u); y = e * (2^30 / sum(e)) >> 22, a Q.8
//         probability. Invalid lanes give 0.
//   ACT_OFF: y = x.
// Timing: 2-stage pipeline, LAT = 2 for every mode, one word per cycle.
module act_unit
  import trine_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  act_mode_e              mode,
  input  logic                   in_valid,
  input  logic [N-1:0]           in_lane_valid,
  input  logic signed [FX_W-1:0] in_x [N],
  output logic                   out_valid,
  output logic signed [FX_W-1:0] out_y [N]
);

  function automatic logic signed [15:0] gelu_t(input int n);
    case (n)
      0: return 0;     1: return 0;     2: return -1;    3: return -4;
      4: return -12;   5: return -26;   6: return -41;   7: return -39;
      8: return 0;     9: return 89;    10: return 215;  11: return 358;
      12: return 500;  13: return 636;  14: return 767;  15: return 896;
      default: return 1024;
    endcase
  endfunction

  function automatic logic signed [15:0] elu_t(input int n);
    case (n)
      0, 1, 2, 3: return -256;
      4, 5: return -255;  6: return -254;  7: return -253;  8: return -251;
      9: return -248;     10: return -243; 11: return -235; 12: return -221;
      13: return -199;    14: return -162; 15: return -101;
      default: return 0;
    endcase
  endfunction

  function automatic logic [16:0] pow2_t(input int n);
    case (n)
      0: return 32768; 1: return 35734; 2: return 38968; 3: return 42495;
      4: return 46341; 5: return 50535; 6: return 55109; 7: return 60097;
      default: return 65536;
    endcase
  endfunction

  // interpolate in a table with breakpoints every 128 (0.5 in Q7.8)
  function automatic logic signed [FX_W-1:0] interp_half(input logic signed [31:0] off,
                                                         input logic sel_gelu);
    int n;
    logic signed [31:0] f, a, b;
    n = int'(off >>> 7);
    f = off & 32'sd127;
    a = sel_gelu ? 32'(gelu_t(n)) : 32'(elu_t(n));
    b = sel_gelu ? 32'(gelu_t(n + 1)) : 32'(elu_t(n + 1));
    return FX_W'(a + (((b - a) * f) >>> 7));
  endfunction

  // 2^u for u <= 0 in Q.8, result scaled by 2^15
  function automatic logic [16:0] exp2_neg(input logic signed [31:0] u);
    logic signed [31:0] ip;
    logic [7:0] fr;
    int n;
    logic [31:0] a, b, m;
    ip = u >>> 8;
    fr = u[7:0];
    n  = int'(fr[7:5]);
    a  = 32'(pow2_t(n));
    b  = 32'(pow2_t(n + 1));
    m  = a + (((b - a) * 32'(fr[4:0])) >> 5);
    if (ip < -32'sd31) return '0;
    return 17'((m >> 1) >> (-ip));
  endfunction

  // stage 1
  logic                   v1;
  logic signed [FX_W-1:0] y1 [N];
  logic [16:0]            e1 [N];
  logic [N-1:0]           lv1;
  logic signed [FX_W-1:0] mx_c;
  // stage 2
  logic                   v2;
  logic signed [FX_W-1:0] y2 [N];
  logic [31:0]            sum_c;
  logic [31:0]            rcp_c;

  always_comb begin
    mx_c = 16'sh8000;
    for (int l = 0; l < N; l++) if (in_lane_valid[l] && in_x[l] > mx_c) mx_c = in_x[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; lv1 <= '0;
      for (int l = 0; l < N; l++) begin y1[l] <= '0; e1[l] <= '0; end
    end else begin
      v1  <= in_valid;
      lv1 <= in_lane_valid;
      for (int l = 0; l < N; l++) begin
        logic signed [31:0] x, z, u;
        x = 32'(in_x[l]);
        z = x - 32'(mx_c);
        u = (z * 32'sd369) >>> 8;
        e1[l] <= in_lane_valid[l] ? exp2_neg(u) : '0;
        unique case (mode)
          ACT_GELU:
            if (x < -32'sd1024)      y1[l] <= '0;
            else if (x >= 32'sd1024) y1[l] <= in_x[l];
            else                     y1[l] <= interp_half(x + 32'sd1024, 1'b1);
          ACT_ELU:
            if (x >= 0)              y1[l] <= in_x[l];
            else if (x < -32'sd2048) y1[l] <= -16'sd256;
            else                     y1[l] <= interp_half(x + 32'sd2048, 1'b0);
          default: y1[l] <= in_x[l];
        endcase
      end
    end
  end

  always_comb begin
    sum_c = '0;
    for (int l = 0; l < N; l++) sum_c += 32'(e1[l]);
    rcp_c = (32'h4000_0000) / ((sum_c == 0) ? 32'd1 : sum_c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0;
      for (int l = 0; l < N; l++) y2[l] <= '0;
    end else begin
      v2 <= v1;
      for (int l = 0; l < N; l++) begin
        if (mode == ACT_SOFTMAX)
          y2[l] <= lv1[l] ? FX_W'((64'(e1[l]) * 64'(rcp_c)) >> 22) : '0;
        else
          y2[l] <= y1[l];
      end
    end
  end

  assign out_valid = v2;
  assign out_y     = y2;

endmodule
