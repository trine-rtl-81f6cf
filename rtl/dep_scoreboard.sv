// dep_scoreboard: event flags that carry the dependency tags of instruction
// blocks between RPUs.
//
// The paper's compiler emits a dependency graph and tags each instruction
// block; the runtime honours it while overlapping independent blocks on
// different RPUs (dependency-aware layer offloading, DALO). Here the tags act
// in hardware: a finishing block sets the flags in its done_tags, and an RPU
// starts a block only when all of the block's wait_tags are set. The host
// clears flags (clr_valid/clr_mask) before it reuses a tag. Which block goes
// to which RPU stays a software decision.
// Timing: a flag set in cycle t is visible from cycle t+1; set wins over clear.
module dep_scoreboard
  import trine_pkg::*;
#(
  parameter int unsigned NSRC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NTAGS-1:0] set_tags [NSRC],
  input  logic             clr_valid,
  input  logic [NTAGS-1:0] clr_mask,
  output logic [NTAGS-1:0] flags,
  output logic [15:0]      n_sets
);

  logic [NTAGS-1:0] set_any;

  always_comb begin
    set_any = '0;
    for (int s = 0; s < NSRC; s++) set_any |= set_tags[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flags  <= '0;
      n_sets <= '0;
    end else begin
      flags <= ((clr_valid ? (flags & ~clr_mask) : flags)) | set_any;
      if (set_any != '0) n_sets <= n_sets + 1'b1;
    end
  end

endmodule
