// dasics_jump_checker_tb -- self-checking test of the jump check.
// Directed cases follow the protected library call of the paper's case
// study: a trusted dasicscall.jr records pc+4, the library may return to
// exactly that address or jump to the trusted-call entry or inside its
// active zone, and any other target (a tampered return address) faults.
// Random cases compare with a reference computed here: untrusted, valid,
// and target is neither the return PC, nor the entry, nor in a V+X zone.
module dasics_jump_checker_tb;
  import dasics_pkg::*;
  localparam int NJ = 4;

  logic        jmp_valid, jmp_untrusted, jmp_is_dasicscall;
  logic [63:0] jmp_pc, jmp_target, maincall, retpc, call_ret_pc;
  logic [63:0] jump_lo [NJ];
  logic [63:0] jump_hi [NJ];
  jump_cfg_t   jump_cfg [NJ];
  logic        jmp_fault, call_valid;
  int checks = 0, failures = 0;

  dasics_jump_checker #(.NUM_JUMP(NJ)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(logic f, logic cv, string what);
    #1; checks++;
    if (jmp_fault !== f || call_valid !== cv) begin
      failures++; $display("FAIL %s: fault=%b call=%b", what, jmp_fault, call_valid);
    end
  endtask

  initial begin
    for (int i = 0; i < NJ; i++) begin jump_lo[i] = 0; jump_hi[i] = 0; jump_cfg[i] = '0; end
    // library code at 0xbbfe0000..0xbbfe1000 is its active zone
    jump_lo[0] = 64'hbbfe_0000; jump_hi[0] = 64'hbbfe_1000; jump_cfg[0] = '{x: 1, v: 1};
    maincall = 64'h6000_8000;   // trusted-call entry
    retpc    = 64'h0;
    // trusted main calls the library with dasicscall.jr
    jmp_valid = 1; jmp_untrusted = 0; jmp_is_dasicscall = 1;
    jmp_pc = 64'h6000_0100; jmp_target = 64'hbbfe_0000;
    expect_out(0, 1, "trusted dasicscall");
    checks++;
    if (call_ret_pc !== 64'h6000_0104) begin failures++; $display("FAIL ret pc %h", call_ret_pc); end
    retpc = call_ret_pc;
    // library: legal return, trusted call, internal jump, tampered return
    jmp_untrusted = 1; jmp_is_dasicscall = 0; jmp_pc = 64'hbbfe_0040;
    jmp_target = 64'h6000_0104; expect_out(0, 0, "legal return");
    jmp_target = 64'h6000_8000; expect_out(0, 0, "trusted call entry");
    jmp_target = 64'hbbfe_0800; expect_out(0, 0, "active zone");
    jmp_target = 64'h6000_0108; expect_out(1, 0, "tampered return");
    jmp_target = 64'hbbfe_1000; expect_out(1, 0, "past active zone");
    jmp_is_dasicscall = 1; jmp_target = 64'h6000_0200;
    expect_out(1, 0, "untrusted dasicscall to trusted code");
    jmp_target = 64'hbbfe_0200;
    expect_out(0, 0, "untrusted dasicscall keeps return pc");
    jmp_valid = 0; jmp_target = 64'h1234; expect_out(0, 0, "no jump");
    jmp_valid = 1; jmp_untrusted = 0; jmp_is_dasicscall = 0;
    expect_out(0, 0, "trusted plain jump");
    // random
    for (int n = 0; n < 4000; n++) begin
      logic ok;
      for (int i = 0; i < NJ; i++) begin
        jump_lo[i]  = {32'h0, $urandom};
        jump_hi[i]  = jump_lo[i] + 64'($urandom_range(0, 8192));
        jump_cfg[i] = 2'($urandom);
      end
      maincall = {32'h0, $urandom}; retpc = {32'h0, $urandom};
      jmp_valid = ($urandom_range(0, 7) != 0);
      jmp_untrusted = 1'($urandom); jmp_is_dasicscall = 1'($urandom);
      jmp_pc = {32'h0, $urandom};
      case ($urandom_range(0, 4))
        0: jmp_target = retpc;
        1: jmp_target = maincall;
        2: jmp_target = jump_lo[$urandom_range(0, NJ-1)];
        3: jmp_target = jump_hi[$urandom_range(0, NJ-1)];
        default: jmp_target = {32'h0, $urandom};
      endcase
      ok = (jmp_target == retpc) || (jmp_target == maincall);
      for (int i = 0; i < NJ; i++)
        if (jump_cfg[i] == 2'b11 && jmp_target >= jump_lo[i] && jmp_target < jump_hi[i]) ok = 1;
      expect_out(jmp_valid && jmp_untrusted && !ok, jmp_valid && !jmp_untrusted && jmp_is_dasicscall, "random");
      checks++;
      if (call_valid && call_ret_pc !== jmp_pc + 4) begin failures++; $display("FAIL rand ret pc"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
