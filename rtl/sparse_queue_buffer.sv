// sparse_queue_buffer: the sparse queue buffer (SQB) and its address generator.
//
// The SQB holds the positions pos(i,j) of the values kept by the top-k unit
// (or of the nonzeros of a sparse operand, pushed by the host), and turns them
// into indexed buffer reads so that the 1 x CS SIMD and RADT modes fetch only
// active pairs (the paper's Fig. 3(b)).
//
// Storage: a FIFO of words of N positions plus a lane mask, as they leave the
// top-k unit (up to N new entries per cycle). The read side keeps the head word
// and a mask of the entries still to hand out; a priority encoder picks the
// lowest remaining lane, so one entry is delivered per cycle with no bubble,
// also across word boundaries.
//
// Address generation for the entry (i, j), given the instruction's bases:
//   SIMD1 (sparse x dense, C[i,:] += A[i,j] * B[j,:]):
//     a_addr = a_base + j (LB word holding column j of A), a_sel = i,
//     b_addr = b_base + j (TB0 row j of B), new_row = i differs from the
//     previous entry's row (or first entry of the instruction).
//   RADT (sampled dense-dense, S[i,j] = X[i,:] . Y[j,:]):
//     a_addr = a_base + i (TB1 row i), b_addr = b_base + j (TB0 row j).
// Timing: entry and addresses are combinational from the head registers;
// pop consumes the entry at the clock edge.
module sparse_queue_buffer
  import trine_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned DEPTH  = 32     // words of N entries (32 x 32 = 1024 positions)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side
  input  logic              wr_en,
  input  logic [N-1:0]      wr_mask,
  input  pos_t              wr_pos [N],
  output logic              wr_ready,
  // address generator configuration
  input  mse_mode_e         mode,
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] b_base,
  input  logic              restart,     // first entry of a new instruction follows
  // read side
  output logic              rd_valid,
  input  logic              pop,
  output pos_t              rd_pos,
  output logic [ADDR_W-1:0] a_addr,
  output logic [ADDR_W-1:0] b_addr,
  output logic [ROW_W-1:0]  a_sel,
  output logic              new_row,
  output logic [$clog2(DEPTH*N+1)-1:0] entries
);

  localparam int unsigned LN = (N > 1) ? $clog2(N) : 1;

  typedef struct packed {
    logic [N-1:0]                      mask;
    logic [N-1:0][$bits(pos_t)-1:0]    pos;
  } sqb_word_t;

  sqb_word_t wdata, rdata, head;
  logic      f_rd, f_full, f_empty, f_af;
  logic [$clog2(DEPTH+1)-1:0] f_count;
  logic [N-1:0] rem;
  logic [LN-1:0] sel;
  logic [N-1:0]  rem_next;
  logic          load;
  logic [ROW_W-1:0] last_row;
  logic             have_last;
  logic [$clog2(DEPTH*N+1)-1:0] n_entries;

  always_comb begin
    wdata.mask = wr_mask;
    for (int l = 0; l < N; l++) wdata.pos[l] = wr_pos[l];
  end

  sync_fifo #(.W($bits(sqb_word_t)), .DEPTH(DEPTH), .AF_MARGIN(1)) u_q (
    .clk, .rst_n,
    .wr_en      (wr_en && wr_ready && (wr_mask != '0)),
    .wr_data    (wdata),
    .rd_en      (f_rd),
    .rd_data    (rdata),
    .full       (f_full),
    .empty      (f_empty),
    .almost_full(f_af),
    .count      (f_count)
  );

  assign wr_ready = !f_full;

  // priority encoder: lowest remaining lane
  always_comb begin
    sel = '0;
    for (int l = N - 1; l >= 0; l--) if (rem[l]) sel = LN'(l);
  end

  assign rd_valid = (rem != '0);
  assign rd_pos   = pos_t'(head.pos[sel]);

  always_comb begin
    rem_next = rem;
    if (pop && rd_valid) rem_next[sel] = 1'b0;
    load = (rem_next == '0) && !f_empty;
    f_rd = load;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem       <= '0;
      head      <= '0;
      last_row  <= '0;
      have_last <= 1'b0;
    end else begin
      if (load) begin
        rem  <= rdata.mask;
        head <= rdata;
      end else begin
        rem <= rem_next;
      end
      if (restart) have_last <= 1'b0;
      else if (pop && rd_valid) begin
        have_last <= 1'b1;
        last_row  <= rd_pos.row;
      end
    end
  end

  // occupancy in entries: head word remainder plus queued words' masks
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_entries <= '0;
    else n_entries <= n_entries
                      + $bits(n_entries)'((wr_en && wr_ready) ? $countones(wr_mask) : 0)
                      - $bits(n_entries)'(pop && rd_valid);
  end
  assign entries = n_entries;

  // address generator
  always_comb begin
    a_sel   = rd_pos.row;
    new_row = !have_last || (rd_pos.row != last_row);
    if (mode == MODE_RADT) begin
      a_addr = a_base + ADDR_W'(rd_pos.row);
      b_addr = b_base + ADDR_W'(rd_pos.col);
    end else begin
      a_addr = a_base + ADDR_W'(rd_pos.col);
      b_addr = b_base + ADDR_W'(rd_pos.col);
    end
  end

  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> rd_valid);

endmodule
