// trine_pkg: types and constants shared by the TRINE accelerator RTL.
//
// Data formats: operands are int8 (the paper runs everything in int8), products
// and partial sums are 32-bit signed. Nonlinear units work on 16-bit fixed point
// with 8 fractional bits (Q7.8); that format is a choice of this RTL.
//
// The instruction block (control block) carries the fields the paper lists for
// a compiled block: mode ID, loop bounds, buffer/operand addresses, pruning
// options and dependency tags. Field widths and the encoding are this RTL's own.
package trine_pkg;

  localparam int unsigned DATA_W = 8;     // int8 operands
  localparam int unsigned ACC_W  = 32;    // accumulator / partial sum
  localparam int unsigned FX_W   = 16;    // Q7.8 fixed point for nonlinear units
  localparam int unsigned FX_FRAC = 8;
  localparam int unsigned ROW_W  = 8;     // row part of a pos(i,j) index
  localparam int unsigned COLI_W = 8;     // column part of a pos(i,j) index
  localparam int unsigned ADDR_W = 10;    // buffer word address
  localparam int unsigned NTAGS  = 16;    // dependency event flags
  localparam int unsigned HOST_W = 512;   // host data word (CS x 16 bits for CS = 32)

  // Execution modes of the mode-switchable engine (Fig. 1(c) of the paper),
  // plus IMPORT, which copies words from the inter-RPU buffer into a local buffer.
  typedef enum logic [2:0] {
    MODE_WS     = 3'd0,  // weight-stationary systolic
    MODE_OS     = 3'd1,  // output-stationary systolic
    MODE_SIMD1  = 3'd2,  // 1 x CS SIMD (sparse, SQB-driven)
    MODE_RADT   = 3'd3,  // routable adder tree (sparse, SQB-driven)
    MODE_SIMDN  = 3'd4,  // normal SIMD, element-wise
    MODE_IMPORT = 3'd5   // data move: inter-RPU buffer -> LB/TB
  } mse_mode_e;

  // Three-function PE ALU plus an idle state.
  typedef enum logic [1:0] {
    OP_NOP  = 2'd0,
    OP_MAC  = 2'd1,
    OP_ADD  = 2'd2,
    OP_PASS = 2'd3
  } pe_op_e;

  typedef enum logic [1:0] {
    NORM_OFF = 2'd0,
    NORM_LN  = 2'd1,   // layer norm across the CS lanes of a word
    NORM_BN  = 2'd2    // batch norm folded to per-lane scale and bias
  } norm_mode_e;

  typedef enum logic [1:0] {
    ACT_OFF     = 2'd0,
    ACT_GELU    = 2'd1,
    ACT_ELU     = 2'd2,
    ACT_SOFTMAX = 2'd3
  } act_mode_e;

  typedef enum logic [1:0] {
    BUF_LB  = 2'd0,
    BUF_TB0 = 2'd1,
    BUF_TB1 = 2'd2
  } buf_sel_e;

  // Position of a value in the score matrix: pos(i,j) in Fig. 2 of the paper.
  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [COLI_W-1:0] col;
  } pos_t;

  // One compiled instruction block.
  typedef struct packed {
    mse_mode_e          mode;
    logic [ADDR_W-1:0]  a_base;     // LB (WS/OS/SIMD1) or TB1 (RADT/SIMDN) base
    logic [ADDR_W-1:0]  b_base;     // TB0 base
    logic [ADDR_W-1:0]  out_base;   // BB base (IMPORT: destination base)
    logic [15:0]        len;        // K (OS), vectors (WS, SIMDN, IMPORT), SQB pairs (SIMD1, RADT)
    logic               elt_add;    // SIMDN: 1 = add, 0 = multiply
    logic [2:0]         radt_lg;    // RADT tree size P = 2**radt_lg lanes
    logic [31:0]        lane_mask;  // RADT active lanes (bit j = lane j)
    buf_sel_e           imp_dst;    // IMPORT destination buffer
    logic               sort_en;    // first top-k stage (bitonic) on
    logic               topk_en;    // second top-k stage (merge) on
    logic               row_grp;    // every output word (one score row) is its own top-k group
    logic [8:0]         topk_k;     // k, 1..256
    logic               thr_en;     // drop values below thr
    logic signed [31:0] thr;
    logic               sqb_load;   // pruned indices go to the SQB
    logic [ROW_W-1:0]   row_base;   // row index of the first output (pos.row)
    logic [4:0]         in_shift;   // int32 -> Q7.8 arithmetic right shift
    norm_mode_e         norm;
    act_mode_e          act;
    logic [3:0]         out_shift;  // Q7.8 -> int8 arithmetic right shift
    logic               fwd;        // also push results into the inter-RPU buffer
    logic [NTAGS-1:0]   wait_tags;  // start only when these event flags are set
    logic [NTAGS-1:0]   done_tags;  // event flags set on completion
  } instr_t;

  // Host transaction targets (Fig. 1(a): the host interface reaches every RPU).
  typedef enum logic [2:0] {
    HT_LB    = 3'd0,
    HT_TB0   = 3'd1,
    HT_TB1   = 3'd2,
    HT_PARAM = 3'd3,   // per-lane norm scale/bias
    HT_INSTR = 3'd4,   // push an instruction block
    HT_BB    = 3'd5,   // read result buffer
    HT_SQB   = 3'd6,   // push index pairs into the sparse queue
    HT_CTRL  = 3'd7    // clear dependency flags
  } host_tgt_e;

  function automatic logic signed [FX_W-1:0] sat_fx(input logic signed [47:0] v);
    if (v > 48'sd32767) return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else return v[FX_W-1:0];
  endfunction

  function automatic logic signed [DATA_W-1:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127) return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else return v[DATA_W-1:0];
  endfunction

endpackage
