// trine_mse: the mode-switchable engine, one RS x CS array of trine_pe.
//
// One PE array time-shares the four dataflows of the paper's Fig. 1(c).
// The engine only holds the interconnect and the per-PE operation control;
// skewing and sequencing are done by the feed schedulers and the ID/EX unit.
//
//   WS/OS systolic  a_west[i] enters row i and moves east, b_north[j] enters
//                   column j and moves south. OS: every PE accumulates in acc;
//                   drain copies every acc to the PE's partial-sum register,
//                   then RS-1 shift cycles move them south, so the bottom row
//                   shows row RS-1, RS-2, .. 0 on consecutive cycles. WS: load_w shifts RS weight rows
//                   down (the row fed first ends in row RS-1); inputs then
//                   flow east and partial sums flow south, out of row RS-1.
//   1 x CS SIMD     only row 0 works: x_bcast (one LB element) is broadcast
//                   along the row, b_north is a TB row; acc += x * b. drain
//                   puts the row on col_out.
//   RADT            row 0 multiplies x_col[j] * b_north[j] on lanes set in
//                   lane_mask (other lanes give 0). Rows 1..log2(CS) form the
//                   tree: at level l the PE of column j (j a multiple of 2**l)
//                   adds its north partial sum and the partial sum of column
//                   j + 2**(l-1) one row up (the cross-row tap), for levels up
//                   to radt_lg; above that it passes. So lane groups of
//                   P = 2**radt_lg columns are reduced to one sum each, found
//                   on col_out[g*P]. Fully pipelined, latency log2(CS)+1.
//                   Sizes P that are not powers of two (the 3-1 tree of the
//                   figure) are obtained by masking lanes of a larger tree.
//   normal SIMD     row 0 computes x_col[j] * b_north[j] or x_col[j] + b_north[j].
//
// col_out takes row RS-1 (WS/OS), row 0 (SIMD modes) or row log2(CS) (RADT).
// Every PE output is registered, so each row adds one cycle of latency.
module trine_mse
  import trine_pkg::*;
#(
  parameter int unsigned RS = 32,   // rows of the PE array
  parameter int unsigned CS = 32    // columns of the PE array
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  mse_mode_e                mode,
  input  logic                     compute,   // operands on the inputs are to be used
  input  logic                     load_w,
  input  logic                     drain,
  input  logic                     shift,
  input  logic                     clr,
  input  logic                     elt_add,
  input  logic [2:0]               radt_lg,
  input  logic [CS-1:0]            lane_mask,
  input  logic signed [DATA_W-1:0] a_west  [RS],
  input  logic signed [DATA_W-1:0] b_north [CS],
  input  logic signed [DATA_W-1:0] x_col   [CS],
  input  logic signed [DATA_W-1:0] x_bcast,
  output logic signed [ACC_W-1:0]  col_out [CS]
);

  localparam int unsigned LG = (CS > 1) ? $clog2(CS) : 1;

  logic signed [DATA_W-1:0] east  [RS][CS];
  logic signed [DATA_W-1:0] south [RS][CS];
  logic signed [ACC_W-1:0]  psum  [RS][CS];

  for (genvar i = 0; i < RS; i++) begin : g_row
    for (genvar j = 0; j < CS; j++) begin : g_col
      logic signed [DATA_W-1:0] w_in, n_in, bc_in;
      logic signed [ACC_W-1:0]  p_in, t_in;
      pe_op_e                   op;

      assign w_in  = (j == 0) ? a_west[i]  : east[i][(j == 0) ? 0 : j-1];
      assign n_in  = (i == 0) ? b_north[j] : south[(i == 0) ? 0 : i-1][j];
      assign p_in  = (i == 0) ? '0         : psum[(i == 0) ? 0 : i-1][j];
      assign bc_in = (mode == MODE_SIMD1 || i != 0) ? x_bcast : x_col[j];

      // Cross-row tap of the routable adder tree: level i reads column
      // j + 2**(i-1) of the row above.
      if (i >= 1 && i <= LG && (j + (1 << (i-1))) < CS) begin : g_tap
        assign t_in = psum[i-1][j + (1 << (i-1))];
      end else begin : g_notap
        assign t_in = '0;
      end

      always_comb begin
        op = OP_NOP;
        unique case (mode)
          MODE_OS:          op = shift ? OP_PASS : (compute ? OP_MAC : OP_NOP);
          MODE_WS:          op = compute ? OP_MAC : OP_NOP;
          MODE_SIMD1:       op = (i == 0 && compute) ? OP_MAC : OP_NOP;
          MODE_SIMDN:       op = (i == 0 && compute) ? (elt_add ? OP_ADD : OP_MAC) : OP_NOP;
          MODE_RADT: begin
            if (i == 0)
              op = (compute && lane_mask[j]) ? OP_MAC : OP_PASS;  // PASS of row 0 gives 0
            else if (i <= LG) begin
              if ((j % (1 << i)) == 0 && i <= int'(radt_lg)) op = OP_ADD;
              else op = OP_PASS;
            end
          end
          default: op = OP_NOP;
        endcase
      end

      trine_pe u_pe (
        .clk, .rst_n, .en,
        .mode,
        .op,
        .load_w   (load_w),
        .drain    (drain && (mode == MODE_OS || mode == MODE_SIMD1)),
        .clr      (clr),
        .west_in  (w_in),
        .north_in (n_in),
        .bcast_in (bc_in),
        .psum_in  (p_in),
        .tap_in   (t_in),
        .east_out (east[i][j]),
        .south_out(south[i][j]),
        .psum_out (psum[i][j])
      );
    end
  end

  always_comb begin
    for (int j = 0; j < CS; j++) begin
      unique case (mode)
        MODE_SIMD1, MODE_SIMDN: col_out[j] = psum[0][j];
        MODE_RADT:              col_out[j] = psum[LG][j];
        default:                col_out[j] = psum[RS-1][j];
      endcase
    end
  end

endmodule
