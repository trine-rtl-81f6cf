// tb_trine_pe: self-checking test of one processing element.
// Drives random operands through every mode/op combination the array uses and
// compares acc/psum results with a model computed here: OS and 1 x CS SIMD
// accumulation, drain and shift-out, WS weight load and MAC on the partial-sum path, RADT ADD
// of north and tap partial sums, PASS, and element-wise add/multiply.
module tb_trine_pe;
  import trine_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic en, load_w, drain, clr;
  mse_mode_e mode;
  pe_op_e    op;
  logic signed [7:0]  west_in, north_in, bcast_in, east_out, south_out;
  logic signed [31:0] psum_in, tap_in, psum_out;

  trine_pe dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic signed [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step();
    @(posedge clk); #1;
  endtask

  initial begin
    logic signed [31:0] model;
    logic signed [7:0]  a, b, w;
    en = 1; load_w = 0; drain = 0; clr = 0; mode = MODE_OS; op = OP_NOP;
    west_in = 0; north_in = 0; bcast_in = 0; psum_in = 0; tap_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    // OS accumulation: acc += west*north, drained to psum_out
    for (int rep = 0; rep < 20; rep++) begin
      mode = (rep % 2) ? MODE_OS : MODE_SIMD1;
      clr = 1; step(); clr = 0;
      model = 0;
      op = OP_MAC;
      for (int t = 0; t < 16; t++) begin
        a = 8'($urandom); b = 8'($urandom);
        west_in = a; bcast_in = 8'($urandom); north_in = b;
        if (mode == MODE_SIMD1) model += bcast_in * b; else model += a * b;
        step();
        check("east forwards x", 32'(east_out), mode == MODE_OS ? 32'(a) : 32'(bcast_in));
        check("south forwards north", 32'(south_out), 32'(b));
      end
      op = OP_NOP;
      psum_in = 32'($urandom);
      drain = 1; step(); drain = 0;
      check("drain puts acc on psum_out", psum_out, model);
      // drain cleared acc; PASS moves psum_in down
      drain = 1; step(); drain = 0;
      check("drain clears acc", psum_out, 0);
      op = OP_PASS; step(); op = OP_NOP;
      check("PASS shifts psum_in", psum_out, psum_in);
    end
    // WS: load a weight, then psum_out = psum_in + west*w
    mode = MODE_WS;
    for (int rep = 0; rep < 20; rep++) begin
      w = 8'($urandom);
      north_in = w; load_w = 1; op = OP_NOP; step(); load_w = 0;
      op = OP_MAC;
      for (int t = 0; t < 8; t++) begin
        a = 8'($urandom); psum_in = 32'($urandom) >>> 4;
        west_in = a; north_in = 8'($urandom);
        step();
        check("WS mac", psum_out, psum_in + a * w);
      end
    end
    // RADT: row-0 product, ADD of psum_in and tap_in, PASS
    mode = MODE_RADT;
    for (int rep = 0; rep < 20; rep++) begin
      a = 8'($urandom); b = 8'($urandom);
      bcast_in = a; north_in = b; psum_in = 0; op = OP_MAC; step();
      check("RADT product", psum_out, a * b);
      psum_in = 32'($urandom) >>> 2; tap_in = 32'($urandom) >>> 2; op = OP_ADD; step();
      check("RADT add", psum_out, psum_in + tap_in);
      op = OP_PASS; psum_in = 32'($urandom); step();
      check("RADT pass", psum_out, psum_in);
    end
    // normal SIMD: element-wise multiply and add
    mode = MODE_SIMDN;
    for (int rep = 0; rep < 20; rep++) begin
      a = 8'($urandom); b = 8'($urandom);
      bcast_in = a; north_in = b; op = OP_MAC; step();
      check("SIMD mul", psum_out, a * b);
      op = OP_ADD; step();
      check("SIMD add", psum_out, 32'(a) + 32'(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
