// idex_unit: instruction decode / execute unit of one RPU (the "ID/EX Unit" of
// the paper's Fig. 1(b)).
//
// The host writes compact instruction blocks (mode, loop bounds, buffer bases,
// pruning options, dependency tags); they wait in a small queue. The unit
// takes the head block when its wait_tags are all set in the shared event
// flags, sequences the buffers, feed schedulers and MSE through the block, waits
// until its last result has left the top-k and nonlinear units, then raises
// done with the block's done_tags. Finishing each block before the next is
// how a mode change drains the in-flight pipeline; the paper states that mode
// changes drain the pipeline and update a few registers.
//
// Per mode (cycle t = read issue; buffer data and the rd_* controls reach the
// MSE at t+1; an output word appears OUT_LAT cycles after its issue):
//   OS     clear, stream len (K) LB/TB0 words through the skews, flush
//          RS+CS cycles, then one drain and RS-1 shift cycles unload the
//          array (OUT_LAT 2, rows RS-1 .. 0).
//   WS     load RS TB0 weight rows (last row first), then stream len LB
//          vectors; OUT_LAT RS+CS (through the output deskew).
//   SIMD1  pop len SQB entries; read LB/TB0 at the generated addresses; a
//          drain (one cycle, no pop) is inserted whenever the row changes and
//          after the last entry (OUT_LAT 2).
//   RADT   pop len SQB entries; read TB1/TB0 at the generated addresses
//          (OUT_LAT log2(CS)+2).
//   SIMDN  stream len TB1/TB0 word pairs (OUT_LAT 2).
//   IMPORT copy len words from the upstream inter-RPU buffer to LB/TB0/TB1.
// Top-k groups: by default all output words of a block form one selection
// group; with row_grp set (WS, SIMDN, OS) each output word, i.e. one row of a
// score matrix, is a group of its own (row-wise top-k).
// Issue of work that produces output pauses while the top-k unit is not ready
// (center buffer nearly full); SQB-driven modes also wait for SQB entries.
// The state machine, counters and latencies are this design's own; the paper
// names the unit and the fields of an instruction block only.
module idex_unit
  import trine_pkg::*;
#(
  parameter int unsigned RS      = 32,
  parameter int unsigned CS      = 32,
  parameter int unsigned IQ_DEPTH = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction queue
  input  logic                iq_push,
  input  instr_t              iq_data,
  output logic                iq_ready,
  // dependency flags
  input  logic [NTAGS-1:0]    flags,
  output logic                done,
  output logic [NTAGS-1:0]    done_tags,
  // current configuration
  output instr_t              cfg,
  output logic                active,
  output logic                start,
  // buffer reads
  output logic                lb_re,
  output logic [ADDR_W-1:0]   lb_raddr,
  output logic                tb0_re,
  output logic [ADDR_W-1:0]   tb0_raddr,
  output logic                tb1_re,
  output logic [ADDR_W-1:0]   tb1_raddr,
  // sparse queue
  input  logic                sqb_valid,
  input  pos_t                sqb_pos,
  input  logic [ADDR_W-1:0]   sqb_a_addr,
  input  logic [ADDR_W-1:0]   sqb_b_addr,
  input  logic [ROW_W-1:0]    sqb_a_sel,
  input  logic                sqb_new_row,
  output logic                sqb_pop,
  output logic                sqb_restart,
  // import from the inter-RPU buffer
  input  logic                up_valid,
  output logic                up_pop,
  output logic [ADDR_W-1:0]   imp_waddr,
  // MSE controls, aligned with buffer read data
  output logic                rd_valid,
  output logic                mse_compute,
  output logic                mse_load_w,
  output logic                mse_drain,
  output logic                mse_shift,
  output logic                mse_clr,
  output logic [ROW_W-1:0]    mse_xsel,
  // output word token, aligned with the MSE / deskew output
  output logic                o_valid,
  output logic                o_first,
  output logic                o_last,
  output logic [ROW_W-1:0]    o_row,
  output logic [COLI_W-1:0]   o_col,
  // downstream status
  input  logic                tk_ready,
  input  logic                tk_busy,
  input  logic                nl_busy,
  // event counters
  output logic [15:0]         n_mode_switch,
  output logic [15:0]         n_tk_stall,
  output logic [15:0]         n_dep_wait
);

  localparam int unsigned LG   = (CS > 1) ? $clog2(CS) : 1;
  localparam int unsigned LMAX = RS + CS;

  typedef enum logic [2:0] {
    S_IDLE, S_CLR, S_LOADW, S_STREAM, S_FLUSH, S_DRAIN, S_WAIT, S_DONE
  } state_e;

  typedef struct packed {
    logic               v;
    logic               first;
    logic               last;
    logic [ROW_W-1:0]   row;
    logic [COLI_W-1:0]  col;
  } tok_t;

  // ---- instruction queue ----
  instr_t iq_head;
  logic   iq_empty, iq_full, iq_af, iq_pop;
  logic [$clog2(IQ_DEPTH+1)-1:0] iq_count;

  sync_fifo #(.W($bits(instr_t)), .DEPTH(IQ_DEPTH), .AF_MARGIN(1)) u_iq (
    .clk, .rst_n,
    .wr_en(iq_push), .wr_data(iq_data),
    .rd_en(iq_pop), .rd_data(iq_head),
    .full(iq_full), .empty(iq_empty), .almost_full(iq_af), .count(iq_count)
  );
  assign iq_ready = !iq_full;

  state_e         st;
  logic [15:0]    cnt;
  logic [7:0]     wcnt;
  logic           emitted;      // SIMD1: an output row has been started
  logic [ROW_W-1:0] cur_row;
  logic           out_first_pending;
  mse_mode_e      prev_mode;
  logic           have_prev;

  tok_t tok_in;
  tok_t tok [LMAX];
  logic rd_v_n, rd_load_n, rd_drain_n, rd_shift_n;
  logic [ROW_W-1:0] rd_sel_n;
  logic issue_ok;

  logic [15:0] len_m1;
  assign len_m1 = cfg.len - 16'd1;

  int unsigned out_lat;
  always_comb begin
    unique case (cfg.mode)
      MODE_WS:   out_lat = RS + CS;
      MODE_RADT: out_lat = LG + 2;
      default:   out_lat = 2;
    endcase
  end

  // ---- issue logic (combinational) ----
  always_comb begin
    lb_re = 1'b0;  lb_raddr  = '0;
    tb0_re = 1'b0; tb0_raddr = '0;
    tb1_re = 1'b0; tb1_raddr = '0;
    sqb_pop = 1'b0;
    up_pop  = 1'b0;
    imp_waddr = cfg.out_base + ADDR_W'(cnt);
    tok_in  = '0;
    rd_v_n = 1'b0; rd_load_n = 1'b0; rd_drain_n = 1'b0; rd_shift_n = 1'b0; rd_sel_n = '0;
    issue_ok = 1'b0;
    unique case (st)
      S_LOADW: begin
        tb0_re    = 1'b1;
        tb0_raddr = cfg.b_base + ADDR_W'(RS - 1 - int'(cnt));
        rd_v_n    = 1'b1;
        rd_load_n = 1'b1;
      end
      S_STREAM: begin
        unique case (cfg.mode)
          MODE_OS: begin
            lb_re = 1'b1;  lb_raddr  = cfg.a_base + ADDR_W'(cnt);
            tb0_re = 1'b1; tb0_raddr = cfg.b_base + ADDR_W'(cnt);
            rd_v_n = 1'b1;
          end
          MODE_WS, MODE_SIMDN: begin
            issue_ok = tk_ready;
            if (issue_ok) begin
              if (cfg.mode == MODE_WS) begin
                lb_re = 1'b1; lb_raddr = cfg.a_base + ADDR_W'(cnt);
              end else begin
                tb1_re = 1'b1; tb1_raddr = cfg.a_base + ADDR_W'(cnt);
              end
              tb0_re = (cfg.mode == MODE_SIMDN);
              tb0_raddr = cfg.b_base + ADDR_W'(cnt);
              rd_v_n = 1'b1;
              tok_in = '{v: 1'b1, first: (cnt == 0) || cfg.row_grp,
                         last: (cnt == len_m1) || cfg.row_grp,
                         row: cfg.row_base + ROW_W'(cnt), col: '0};
            end
          end
          MODE_SIMD1: begin
            if (cnt == cfg.len) begin
              // final drain of the last row
              issue_ok   = tk_ready;
              rd_v_n     = issue_ok;
              rd_drain_n = issue_ok;
              tok_in     = '{v: issue_ok, first: out_first_pending, last: 1'b1,
                            row: cur_row, col: '0};
            end else if (sqb_valid && tk_ready) begin
              issue_ok = 1'b1;
              if (sqb_new_row && emitted) begin
                rd_v_n     = 1'b1;
                rd_drain_n = 1'b1;
                tok_in     = '{v: 1'b1, first: out_first_pending, last: 1'b0,
                              row: cur_row, col: '0};
              end else begin
                sqb_pop = 1'b1;
                lb_re = 1'b1;  lb_raddr  = sqb_a_addr;
                tb0_re = 1'b1; tb0_raddr = sqb_b_addr;
                rd_v_n = 1'b1; rd_sel_n = sqb_a_sel;
              end
            end
          end
          MODE_RADT: begin
            issue_ok = sqb_valid && tk_ready;
            if (issue_ok) begin
              sqb_pop = 1'b1;
              tb1_re = 1'b1; tb1_raddr = sqb_a_addr;
              tb0_re = 1'b1; tb0_raddr = sqb_b_addr;
              rd_v_n = 1'b1;
              tok_in = '{v: 1'b1, first: (cnt == 0), last: (cnt == len_m1),
                         row: sqb_pos.row, col: sqb_pos.col};
            end
          end
          MODE_IMPORT: begin
            issue_ok = up_valid;
            up_pop   = up_valid;
          end
          default: ;
        endcase
      end
      S_DRAIN: begin
        rd_drain_n = (cnt == 0);
        rd_shift_n = (cnt != 0);
        tok_in     = '{v: 1'b1, first: (cnt == 0) || cfg.row_grp,
                      last: (cnt == 16'(RS - 1)) || cfg.row_grp,
                      row: cfg.row_base + ROW_W'(RS - 1 - int'(cnt)), col: '0};
      end
      default: ;
    endcase
  end

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      cfg <= '0;
      cnt <= '0;
      wcnt <= '0;
      emitted <= 1'b0;
      cur_row <= '0;
      out_first_pending <= 1'b0;
      prev_mode <= MODE_WS;
      have_prev <= 1'b0;
      n_mode_switch <= '0;
      n_tk_stall <= '0;
      n_dep_wait <= '0;
    end else begin
      unique case (st)
        S_IDLE: begin
          if (!iq_empty) begin
            if ((iq_head.wait_tags & ~flags) == '0) begin
              cfg <= iq_head;
              cnt <= '0;
              wcnt <= '0;
              emitted <= 1'b0;
              out_first_pending <= 1'b1;
              if (have_prev && prev_mode != iq_head.mode) n_mode_switch <= n_mode_switch + 1'b1;
              prev_mode <= iq_head.mode;
              have_prev <= 1'b1;
              unique case (iq_head.mode)
                MODE_OS, MODE_SIMD1: st <= S_CLR;
                MODE_WS:             st <= S_LOADW;
                default:             st <= (iq_head.len == 0) ? S_WAIT : S_STREAM;
              endcase
            end else begin
              n_dep_wait <= n_dep_wait + 1'b1;
            end
          end
        end
        S_CLR: begin
          st <= (cfg.len == 0 && cfg.mode == MODE_SIMD1) ? S_WAIT : S_STREAM;
        end
        S_LOADW: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(RS - 1)) begin
            cnt <= '0;
            st  <= (cfg.len == 0) ? S_WAIT : S_STREAM;
          end
        end
        S_STREAM: begin
          if (!tk_ready && cfg.mode != MODE_OS && cfg.mode != MODE_IMPORT)
            n_tk_stall <= n_tk_stall + 1'b1;
          unique case (cfg.mode)
            MODE_OS: begin
              cnt <= cnt + 1'b1;
              if (cnt == len_m1) begin
                st <= S_FLUSH; wcnt <= '0;
              end
            end
            MODE_SIMD1: begin
              if (issue_ok) begin
                if (cnt == cfg.len) begin
                  st <= S_WAIT; wcnt <= '0;
                end else if (sqb_new_row && emitted) begin
                  emitted <= 1'b0;
                  out_first_pending <= 1'b0;
                end else begin
                  cnt     <= cnt + 1'b1;
                  emitted <= 1'b1;
                  cur_row <= sqb_a_sel;
                end
              end
            end
            default: begin
              if (issue_ok) begin
                cnt <= cnt + 1'b1;
                if (cnt == len_m1) begin
                  st <= S_WAIT; wcnt <= '0;
                end
              end
            end
          endcase
        end
        S_FLUSH: begin
          wcnt <= wcnt + 1'b1;
          if (int'(wcnt) == RS + CS) begin
            st <= S_DRAIN; cnt <= '0;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(RS - 1)) begin
            st <= S_WAIT; wcnt <= '0;
          end
        end
        S_WAIT: begin
          // all tokens out of the MSE, top-k and nonlinear units idle
          if (tok_busy() || tk_busy || nl_busy) wcnt <= '0;
          else wcnt <= wcnt + 1'b1;
          if (wcnt == 8'd2) st <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  function automatic logic tok_busy();
    for (int n = 0; n < int'(LMAX); n++) if (tok[n].v) return 1'b1;
    return 1'b0;
  endfunction

  assign iq_pop      = (st == S_DONE);
  assign done        = (st == S_DONE);
  assign done_tags   = (st == S_DONE) ? cfg.done_tags : '0;
  assign active      = (st != S_IDLE);
  assign start       = (st == S_IDLE) && !iq_empty && ((iq_head.wait_tags & ~flags) == '0);
  assign sqb_restart = start;

  // ---- alignment registers: read controls and output tokens ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid   <= 1'b0;
      mse_load_w <= 1'b0;
      mse_drain  <= 1'b0;
      mse_shift  <= 1'b0;
      mse_xsel   <= '0;
      for (int n = 0; n < int'(LMAX); n++) tok[n] <= '0;
    end else begin
      rd_valid   <= rd_v_n;
      mse_load_w <= rd_load_n;
      mse_drain  <= rd_drain_n;
      mse_shift  <= rd_shift_n;
      mse_xsel   <= rd_sel_n;
      tok[0] <= tok_in;
      for (int n = 1; n < int'(LMAX); n++) tok[n] <= tok[n-1];
    end
  end

  // OS and WS keep every PE computing while the block runs (idle lanes carry
  // zeros); the SIMD modes compute only on issued reads.
  assign mse_clr = (st == S_CLR);

  assign mse_compute = (cfg.mode == MODE_OS || cfg.mode == MODE_WS) ? (st != S_IDLE)
                                                                    : (rd_valid && !mse_drain);

  always_comb begin
    o_valid = tok[out_lat-1].v;
    o_first = tok[out_lat-1].first;
    o_last  = tok[out_lat-1].last;
    o_row   = tok[out_lat-1].row;
    o_col   = tok[out_lat-1].col;
  end

  a_no_tok_loss: assert property (@(posedge clk) disable iff (!rst_n)
                                  (st == S_DONE) |-> !tok_busy());

endmodule
