// tb_dep_scoreboard: random set pulses from four sources and random host
// clears; checks the event flags and the set counter against a reference
// (a set in the same cycle as a clear wins).
module tb_dep_scoreboard;
  import trine_pkg::*;
  localparam int NSRC = 4, NCYC = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NTAGS-1:0] set_tags [NSRC];
  logic clr_valid;
  logic [NTAGS-1:0] clr_mask, flags;
  logic [15:0] n_sets;

  dep_scoreboard #(.NSRC(NSRC)) dut (.*);

  initial begin
    repeat (NCYC + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [NTAGS-1:0] rf = '0, any;
  int rn = 0;

  initial begin
    clr_valid = 0; clr_mask = 0;
    for (int s = 0; s < NSRC; s++) set_tags[s] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      @(negedge clk);
      checks++;
      if (flags != rf || n_sets != 16'(rn)) begin
        failures++; $display("FAIL c%0d flags %h exp %h", c, flags, rf);
      end
      any = '0;
      for (int s = 0; s < NSRC; s++) begin
        set_tags[s] = ($urandom % 6 == 0) ? (NTAGS'(1) << ($urandom % NTAGS)) : '0;
        any |= set_tags[s];
      end
      clr_valid = ($urandom % 5) == 0;
      clr_mask  = NTAGS'($urandom);
      @(posedge clk);
      rf = (clr_valid ? (rf & ~clr_mask) : rf) | any;
      if (any != 0) rn++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
