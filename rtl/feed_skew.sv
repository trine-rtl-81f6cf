// feed_skew: the pipelined delay insertion of the feed scheduler.
//
// A systolic array needs lane i of a word to arrive i cycles after lane 0
// (the staircase of the paper's Fig. 3(a)); data can then be stored in the
// buffers in plain row order and needs no reshaping by the host. Lane i passes
// through a shift register of depth i (REVERSE=0) or N-1-i (REVERSE=1, used to
// undo the skew at the array output). The same structure, one instance per
// array edge, serves the left, top and bottom feed schedulers.
//
// Interface: in_vec/in_valid enter every cycle that en is high; out_vec holds
// the delayed lanes and out_valid[i] the delayed valid of lane i. Lanes whose
// valid is low are zero, so an idle systolic PE adds nothing.
// Latency of lane i: i cycles (REVERSE=0) or N-1-i cycles (REVERSE=1).
module feed_skew #(
  parameter int unsigned N       = 32,   // number of lanes
  parameter int unsigned W       = 8,    // lane width
  parameter bit          REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] in_vec   [N],
  input  logic         in_valid,
  output logic [W-1:0] out_vec  [N],
  output logic [N-1:0] out_valid
);

  for (genvar i = 0; i < N; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (N - 1 - i) : i;
    if (D == 0) begin : g_direct
      assign out_vec[i]   = in_valid ? in_vec[i] : '0;
      assign out_valid[i] = in_valid;
    end else begin : g_delay
      logic [W-1:0] sr_d [D];
      logic [D-1:0] sr_v;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < int'(D); k++) sr_d[k] <= '0;
          sr_v <= '0;
        end else if (en) begin
          sr_d[0] <= in_valid ? in_vec[i] : '0;
          sr_v[0] <= in_valid;
          for (int k = 1; k < int'(D); k++) begin
            sr_d[k] <= sr_d[k-1];
            sr_v[k] <= sr_v[k-1];
          end
        end
      end
      assign out_vec[i]   = sr_d[D-1];
      assign out_valid[i] = sr_v[D-1];
    end
  end

endmodule
