// trine_pe: one processing element of the mode-switchable engine (MSE).
//
// As the paper describes it, a PE has west and north operand inputs, a
// partial-sum path, a tiny register file for reuse and a three-function ALU
// (MAC / ADD / PASS). Two small multiplexers make the same PE serve every
// dataflow: one steers the B operand (north stream, or the stationary weight
// held in the register file), the other selects the operation.
//
//   mode  x operand  y operand  MAC addend  used for
//   OS    west_in    north_in   acc         output-stationary systolic
//   WS    west_in    w_reg      psum_in     weight-stationary systolic
//   SIMD1 bcast_in   north_in   acc         1 x CS SIMD (row broadcast of x)
//   RADT  bcast_in   north_in   0           product at the top row of a tree
//   SIMDN bcast_in   north_in   0           element-wise multiply
// OP_ADD adds psum_in and tap_in (the cross-row tap of the adder tree); in
// SIMDN it adds the two int8 operands instead. OP_PASS forwards psum_in.
//
// The register file holds two words: the stationary weight (w_reg) and the
// accumulator (acc). load_w shifts a weight in from the north; drain copies
// acc to psum_out and clears acc; OP_PASS then moves psum_out one row south per
// cycle, so a column of PEs unloads its results like a shift register. clr
// zeroes acc. MAC accumulates into acc in OS and 1 x CS SIMD; every other
// operation writes psum_out.
//
// Timing: every output is registered; east_out/south_out forward the operands
// one cycle later (systolic wavefront), psum_out is valid one cycle after en.
// The operand muxing per mode is this design's reading of Fig. 1(c).
module trine_pe
  import trine_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,       // advance the PE this cycle
  input  mse_mode_e                mode,
  input  pe_op_e                   op,
  input  logic                     load_w,
  input  logic                     drain,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] west_in,
  input  logic signed [DATA_W-1:0] north_in,
  input  logic signed [DATA_W-1:0] bcast_in,
  input  logic signed [ACC_W-1:0]  psum_in,
  input  logic signed [ACC_W-1:0]  tap_in,
  output logic signed [DATA_W-1:0] east_out,
  output logic signed [DATA_W-1:0] south_out,
  output logic signed [ACC_W-1:0]  psum_out
);

  logic signed [DATA_W-1:0] w_reg;
  logic signed [ACC_W-1:0]  acc;
  logic signed [DATA_W-1:0] x, y;
  logic signed [ACC_W-1:0]  addend, alu;

  always_comb begin
    x = (mode == MODE_OS || mode == MODE_WS) ? west_in : bcast_in;
    y = (mode == MODE_WS) ? w_reg : north_in;
    unique case (mode)
      MODE_WS:               addend = psum_in;
      MODE_OS, MODE_SIMD1:   addend = acc;
      default:               addend = '0;
    endcase
    unique case (op)
      OP_MAC:  alu = addend + ACC_W'(x * y);
      OP_ADD:  alu = (mode == MODE_SIMDN) ? ACC_W'(x) + ACC_W'(y) : psum_in + tap_in;
      OP_PASS: alu = psum_in;
      default: alu = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_reg     <= '0;
      acc       <= '0;
      east_out  <= '0;
      south_out <= '0;
      psum_out  <= '0;
    end else if (en) begin
      east_out <= x;
      south_out <= north_in;
      if (load_w) w_reg <= north_in;
      if (clr) begin
        acc <= '0;
      end else if (drain) begin
        psum_out <= acc;
        acc      <= '0;
      end else if (op == OP_MAC && (mode == MODE_OS || mode == MODE_SIMD1)) begin
        acc <= alu;
      end else if (op != OP_NOP) begin
        psum_out <= alu;
      end
    end
  end

endmodule
