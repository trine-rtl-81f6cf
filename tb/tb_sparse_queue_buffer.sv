// tb_sparse_queue_buffer: pushes random masked words of 8 positions into an
// 8-lane, 4-word SQB while popping at random, and checks against a reference
// queue of entries (word order, then ascending lane): rd_valid, rd_pos, the
// generated addresses for SIMD1 and RADT, new_row (including after restart),
// the entry count, and that a written entry is visible within two cycles.
module tb_sparse_queue_buffer;
  import trine_pkg::*;
  localparam int N = 8, DEPTH = 4, NCYC = 4000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_ready, restart, rd_valid, pop, new_row;
  logic [N-1:0] wr_mask;
  pos_t wr_pos [N], rd_pos;
  mse_mode_e mode;
  logic [ADDR_W-1:0] a_base, b_base, a_addr, b_addr;
  logic [ROW_W-1:0] a_sel;
  logic [$clog2(DEPTH*N+1)-1:0] entries;

  sparse_queue_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (NCYC + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  pos_t q [$];
  logic have_last = 0;
  logic [7:0] last_row = 0;
  int wr_words = 0, stall = 0;

  initial begin
    wr_en = 0; wr_mask = 0; restart = 0; pop = 0; mode = MODE_SIMD1; a_base = 10; b_base = 100;
    for (int l = 0; l < N; l++) wr_pos[l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      // check current head against reference
      checks++;
      // a new word becomes visible two cycles after it is written
      if (rd_valid && q.size() == 0) begin failures++; $display("FAIL rd_valid c%0d", c); end
      stall = (q.size() > 0 && !rd_valid) ? stall + 1 : 0;
      if (stall > 2) begin failures++; $display("FAIL entry not delivered c%0d", c); end
      if (entries != $bits(entries)'(q.size())) begin failures++; $display("FAIL entries %0d/%0d", entries, q.size()); end
      if (rd_valid && q.size() > 0) begin
        checks++;
        if (rd_pos != q[0] || a_sel != q[0].row ||
            new_row != (!have_last || q[0].row != last_row) ||
            b_addr != b_base + ADDR_W'(q[0].col) ||
            a_addr != a_base + ADDR_W'(mode == MODE_RADT ? q[0].row : q[0].col)) begin
          failures++; $display("FAIL entry c%0d pos %h exp %h", c, rd_pos, q[0]);
        end
      end
      // drive next cycle
      mode = ($urandom % 2) ? MODE_RADT : MODE_SIMD1;
      restart = ($urandom % 50) == 0;
      pop = rd_valid && ($urandom % 3 != 0) && !restart;
      wr_en = ($urandom % 4) == 0;
      wr_mask = ($urandom % 5 == 0) ? '0 : N'($urandom);
      for (int l = 0; l < N; l++) begin
        wr_pos[l].row = 8'($urandom % 4);
        wr_pos[l].col = 8'($urandom);
      end
      @(posedge clk);
      if (restart) have_last = 0;
      if (pop) begin have_last = 1; last_row = q[0].row; void'(q.pop_front()); end
      if (wr_en && wr_ready) begin
        for (int l = 0; l < N; l++) if (wr_mask[l]) q.push_back(wr_pos[l]);
        if (wr_mask != 0) wr_words++;
      end
    end
    @(negedge clk); wr_en = 0; pop = 0;
    // checks on fullness: fill until not ready
    checks++;
    if (wr_words < 20) begin failures++; $display("FAIL too few writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
