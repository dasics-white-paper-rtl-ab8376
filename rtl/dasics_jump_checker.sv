// dasics_jump_checker -- control-flow check of jal/jalr in the jump unit.
//
// An untrusted jump may only go to
//   * the return PC recorded by the trusted dasicscall.jr that entered the
//     untrusted code (a legal function return),
//   * the trusted-call entry point registered by trusted code, or
//   * an active zone (a jump bound register with V and X set).
// Any other target raises jmp_fault, a DASICS jump exception. This is what
// stops a library that overwrote its own return address from returning into
// the middle of trusted code.
// A trusted dasicscall.jr is never faulted; it sends its return address,
// pc + 4, to the return-PC register (call_valid / call_ret_pc). An untrusted
// dasicscall.jr is checked like any jump and does not touch the return PC.
// Interface: one jump per cycle (jmp_*), configuration from dasics_csr.
// Purely combinational. The three allowed target kinds and the return-PC
// capture are the paper's; pc + 4 (no compressed calls) and the handling of
// untrusted dasicscall.jr are this design's choice.
module dasics_jump_checker
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN     = dasics_pkg::DEF_XLEN,
  parameter int unsigned NUM_JUMP = dasics_pkg::DEF_NUM_JUMP
) (
  input  logic            jmp_valid,
  input  logic            jmp_untrusted,
  input  logic            jmp_is_dasicscall,
  input  logic [XLEN-1:0] jmp_pc,
  input  logic [XLEN-1:0] jmp_target,
  input  logic [XLEN-1:0] jump_lo  [NUM_JUMP],
  input  logic [XLEN-1:0] jump_hi  [NUM_JUMP],
  input  jump_cfg_t       jump_cfg [NUM_JUMP],
  input  logic [XLEN-1:0] maincall,
  input  logic [XLEN-1:0] retpc,
  output logic            jmp_fault,
  output logic            call_valid,
  output logic [XLEN-1:0] call_ret_pc
);

  logic in_zone;
  always_comb begin
    in_zone = 1'b0;
    for (int i = 0; i < NUM_JUMP; i++)
      if (jump_cfg[i].v && jump_cfg[i].x && in_range(jmp_target, jump_lo[i], jump_hi[i]))
        in_zone = 1'b1;
  end

  logic legal;
  assign legal = (jmp_target == retpc) || (jmp_target == maincall) || in_zone;

  assign jmp_fault   = jmp_valid && jmp_untrusted && !legal;
  assign call_valid  = jmp_valid && !jmp_untrusted && jmp_is_dasicscall;
  assign call_ret_pc = jmp_pc + XLEN'(4);

endmodule
