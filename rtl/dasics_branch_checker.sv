// dasics_branch_checker -- front-end check of taken branches of untrusted
// code.
//
// A conditional branch of untrusted code may only land inside an active
// zone: one of the jump bound registers whose V (valid) and X (target
// allowed) bits are both set. Otherwise untrusted code could branch straight
// into trusted code and skip the jump checker. The fetch unit reports each
// taken branch (br_valid, the tag of the branch and its target) and gets
// br_fault back, a DASICS exception for that branch. Trusted branches are
// never faulted. Purely combinational.
// The active-zone rule is the paper's; requiring X as well as V and the
// combinational timing are this design's reading of the figure.
module dasics_branch_checker
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN     = dasics_pkg::DEF_XLEN,
  parameter int unsigned NUM_JUMP = dasics_pkg::DEF_NUM_JUMP
) (
  input  logic            br_valid,
  input  logic            br_untrusted,
  input  logic [XLEN-1:0] br_target,
  input  logic [XLEN-1:0] jump_lo  [NUM_JUMP],
  input  logic [XLEN-1:0] jump_hi  [NUM_JUMP],
  input  jump_cfg_t       jump_cfg [NUM_JUMP],
  output logic            br_fault
);

  logic in_zone;
  always_comb begin
    in_zone = 1'b0;
    for (int i = 0; i < NUM_JUMP; i++)
      if (jump_cfg[i].v && jump_cfg[i].x && in_range(br_target, jump_lo[i], jump_hi[i]))
        in_zone = 1'b1;
  end

  assign br_fault = br_valid && br_untrusted && !in_zone;

endmodule
