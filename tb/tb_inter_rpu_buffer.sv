// tb_inter_rpu_buffer: random push/pop traffic on a 16-bit, 8-deep buffer,
// compared against a reference queue: data order, valid, full, count and the
// high-water mark. Pushes are only issued when not full, as the RPU does.
module tb_inter_rpu_buffer;
  localparam int W = 16, DEPTH = 8, NCYC = 3000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, full, pop, valid;
  logic [W-1:0] push_data, pop_data;
  logic [$clog2(DEPTH+1)-1:0] count, high_water;

  inter_rpu_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (NCYC + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [W-1:0] q [$];
  int hw = 0, saw_full = 0;

  initial begin
    push = 0; pop = 0; push_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      checks++;
      if (valid != (q.size() > 0) || full != (q.size() == DEPTH) || count != 4'(q.size()) ||
          high_water != 4'(hw) || (valid && pop_data != q[0])) begin
        failures++; $display("FAIL c%0d valid=%0b full=%0b count=%0d ref=%0d", c, valid, full, count, q.size());
      end
      if (full) saw_full++;
      // bias towards filling in the first half, draining in the second
      push = !full && ($urandom % 4 < ((c < NCYC / 2) ? 3 : 1));
      pop  = valid && ($urandom % 4 < ((c < NCYC / 2) ? 1 : 3));
      push_data = W'($urandom);
      @(posedge clk);
      if (q.size() > hw) hw = q.size();   // the mark follows count one cycle later
      if (pop) void'(q.pop_front());
      if (push) q.push_back(push_data);
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
