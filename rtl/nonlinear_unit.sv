// nonlinear_unit: the compact nonlinear block at the end of an RPU datapath
// (Layer/Batch Norm followed by GELU/ELU/Softmax in the paper's Fig. 1(b)).
//
// Each word of N int32 lanes is
//   1. requantised to Q7.8: x = sat16(v >>> in_shift),
//   2. normalised by norm_unit (or passed),
//   3. activated by act_unit (or passed),
//   4. quantised back to int8 for the bottom buffer: q = sat8(y >>> out_shift).
// With both units off this is the plain requantisation every int8 layer
// needs. The order norm -> activation follows the figure; the fixed-point
// formats are this design's choice.
// Timing: LAT = 7 cycles (1 + 3 + 2 + 1), one word per cycle, no stalls.
// lane_valid and last travel alongside the data.
module nonlinear_unit
  import trine_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [4:0]               in_shift,
  input  norm_mode_e               norm_mode,
  input  act_mode_e                act_mode,
  input  logic [3:0]               out_shift,
  input  logic signed [FX_W-1:0]   param_scale [N],
  input  logic signed [FX_W-1:0]   param_bias  [N],
  input  logic                     in_valid,
  input  logic                     in_last,
  input  logic [N-1:0]             in_lane_valid,
  input  logic signed [ACC_W-1:0]  in_v [N],
  output logic                     out_valid,
  output logic                     out_last,
  output logic [N-1:0]             out_lane_valid,
  output logic signed [DATA_W-1:0] out_q [N]
);

  localparam int unsigned LAT = 7;

  logic                   rq_v;
  logic signed [FX_W-1:0] rq_x [N];
  logic                   nm_v, ac_v;
  logic signed [FX_W-1:0] nm_y [N];
  logic signed [FX_W-1:0] ac_y [N];
  logic [N-1:0]           lv_pipe [LAT];
  logic [LAT-1:0]         last_pipe;
  logic                   q_v;
  logic signed [DATA_W-1:0] q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_v <= 1'b0;
      for (int l = 0; l < N; l++) rq_x[l] <= '0;
    end else begin
      rq_v <= in_valid;
      for (int l = 0; l < N; l++) rq_x[l] <= sat_fx(48'(in_v[l] >>> in_shift));
    end
  end

  norm_unit #(.N(N)) u_norm (
    .clk, .rst_n,
    .mode       (norm_mode),
    .in_valid   (rq_v),
    .in_x       (rq_x),
    .param_scale(param_scale),
    .param_bias (param_bias),
    .out_valid  (nm_v),
    .out_y      (nm_y)
  );

  act_unit #(.N(N)) u_act (
    .clk, .rst_n,
    .mode         (act_mode),
    .in_valid     (nm_v),
    .in_lane_valid(lv_pipe[3]),
    .in_x         (nm_y),
    .out_valid    (ac_v),
    .out_y        (ac_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_v <= 1'b0;
      for (int l = 0; l < N; l++) q[l] <= '0;
      for (int s = 0; s < LAT; s++) lv_pipe[s] <= '0;
      last_pipe <= '0;
    end else begin
      q_v <= ac_v;
      for (int l = 0; l < N; l++) q[l] <= sat8(32'(ac_y[l]) >>> out_shift);
      lv_pipe[0] <= in_lane_valid;
      for (int s = 1; s < LAT; s++) lv_pipe[s] <= lv_pipe[s-1];
      last_pipe <= {last_pipe[LAT-2:0], in_valid && in_last};
    end
  end

  assign out_valid      = q_v;
  assign out_last       = last_pipe[LAT-1];
  assign out_lane_valid = lv_pipe[LAT-1];
  assign out_q          = q;

endmodule
