// tb_host_interface: random host transactions to four RPU ports with random
// ready; checks the one-hot RPU select, forwarded fields, h_ready, flag clears
// through the control target, and that read data (RPU word or the control
// status {flags, busy}) returns exactly one cycle after an accepted read.
module tb_host_interface;
  import trine_pkg::*;
  localparam int NRPU = 4, NCYC = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic h_valid, h_ready, h_we, h_rvalid, r_we, clr_valid;
  logic [1:0] h_rpu;
  host_tgt_e h_tgt, r_tgt;
  logic [ADDR_W-1:0] h_addr, r_addr;
  logic [HOST_W-1:0] h_wdata, h_rdata, r_wdata;
  logic [NRPU-1:0] r_valid, r_ready, r_busy;
  logic [HOST_W-1:0] r_rdata [NRPU];
  logic [NTAGS-1:0] flags, clr_mask;

  host_interface #(.NRPU(NRPU)) dut (.*);

  initial begin
    repeat (2 * NCYC + 100) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic exp_rv = 0;
  logic [HOST_W-1:0] exp_rd = '0;

  initial begin
    h_valid = 0; h_we = 0; h_rpu = 0; h_tgt = HT_LB; h_addr = 0; h_wdata = '0;
    r_ready = '1; r_busy = '0; flags = '0;
    for (int r = 0; r < NRPU; r++) r_rdata[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < NCYC; c++) begin
      logic acc;
      @(negedge clk);
      // read response of the previous cycle
      checks++;
      if (h_rvalid != exp_rv || (exp_rv && h_rdata != exp_rd)) begin
        failures++; $display("FAIL c%0d read response", c);
      end
      h_valid = ($urandom % 3) != 0;
      h_we    = $urandom % 2;
      h_rpu   = 2'($urandom);
      h_tgt   = host_tgt_e'($urandom % 8);
      h_addr  = ADDR_W'($urandom);
      h_wdata = {16{$urandom}};
      r_ready = NRPU'($urandom) | NRPU'($urandom);
      r_busy  = NRPU'($urandom);
      flags   = NTAGS'($urandom);
      for (int r = 0; r < NRPU; r++) r_rdata[r] = {16{$urandom}};
      #1;
      checks++;
      if (h_tgt == HT_CTRL) begin
        if (r_valid != 0 || !h_ready || clr_valid != (h_valid && h_we) ||
            (clr_valid && clr_mask != h_wdata[NTAGS-1:0])) begin
          failures++; $display("FAIL c%0d ctrl", c);
        end
      end else begin
        if (r_valid != (h_valid ? NRPU'(1) << h_rpu : '0) || h_ready != r_ready[h_rpu] || clr_valid ||
            r_we != h_we || r_tgt != h_tgt || r_addr != h_addr || r_wdata != h_wdata) begin
          failures++; $display("FAIL c%0d route", c);
        end
      end
      acc = h_valid && h_ready;
      exp_rv = acc && !h_we;
      exp_rd = '0;
      if (h_tgt == HT_CTRL) exp_rd[NTAGS+NRPU-1:0] = {flags, r_busy};
      else exp_rd = r_rdata[h_rpu];
      @(posedge clk);
      // RPU read data is sampled one cycle later: hold the selected word
      @(negedge clk);
      if (h_tgt != HT_CTRL) exp_rd = r_rdata[h_rpu];
      else exp_rd[NTAGS+NRPU-1:0] = {flags, r_busy};
      checks++;
      if (h_rvalid != exp_rv || (exp_rv && h_rdata != exp_rd)) begin
        failures++; $display("FAIL c%0d read data", c);
      end
      exp_rv = 0;
      h_valid = 0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
