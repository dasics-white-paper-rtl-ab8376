// dasics_branch_checker_tb -- self-checking test of the front-end branch
// check. Four active zones with random bounds and V/X bits are set up, and
// taken branches of trusted and untrusted code with targets on, inside and
// just outside the zones are applied. The expected fault is computed here:
// an untrusted, valid branch whose target is in no zone that has both V and
// X set. The first case uses the bound printed in the paper's block diagram
// (0xbbfe0000 .. 0xbbfe1000).
module dasics_branch_checker_tb;
  import dasics_pkg::*;
  localparam int NJ = 4;

  logic        br_valid, br_untrusted, br_fault;
  logic [63:0] br_target;
  logic [63:0] jump_lo [NJ];
  logic [63:0] jump_hi [NJ];
  jump_cfg_t   jump_cfg [NJ];
  int checks = 0, failures = 0;
  int n_fault = 0;

  dasics_branch_checker #(.NUM_JUMP(NJ)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_fault();
    logic ok = 0;
    for (int i = 0; i < NJ; i++)
      if (jump_cfg[i] == 2'b11 && br_target >= jump_lo[i] && br_target < jump_hi[i]) ok = 1;
    return br_valid && br_untrusted && !ok;
  endfunction

  task automatic check(string what);
    #1; checks++;
    if (br_fault !== ref_fault()) begin
      failures++;
      $display("FAIL %s target=%h untrusted=%b got %b", what, br_target, br_untrusted, br_fault);
    end
    if (br_fault) n_fault++;
  endtask

  task automatic expect_fault(logic exp, string what);
    #1; checks++;
    if (br_fault !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < NJ; i++) begin jump_lo[i] = 0; jump_hi[i] = 0; jump_cfg[i] = '0; end
    jump_lo[0] = 64'hbbfe_0000; jump_hi[0] = 64'hbbfe_1000; jump_cfg[0] = '{x: 1, v: 1};
    br_valid = 1; br_untrusted = 1;
    br_target = 64'hbbfe_0000; expect_fault(0, "zone start");
    br_target = 64'hbbfe_0ffc; expect_fault(0, "zone end");
    br_target = 64'hbbfe_1000; expect_fault(1, "just past zone");
    br_target = 64'hbbfd_fffc; expect_fault(1, "just before zone");
    br_untrusted = 0;           expect_fault(0, "trusted branch");
    br_untrusted = 1; br_valid = 0; expect_fault(0, "no branch");
    br_valid = 1; br_target = 64'hbbfe_0800;
    jump_cfg[0] = '{x: 0, v: 1}; expect_fault(1, "X clear");
    jump_cfg[0] = '{x: 1, v: 0}; expect_fault(1, "V clear");
    for (int n = 0; n < 4000; n++) begin
      for (int i = 0; i < NJ; i++) begin
        jump_lo[i]  = {32'h0, $urandom};
        jump_hi[i]  = jump_lo[i] + 64'($urandom_range(0, 8192));
        jump_cfg[i] = 2'($urandom);
      end
      br_valid = ($urandom_range(0, 7) != 0);
      br_untrusted = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: br_target = jump_lo[$urandom_range(0, NJ-1)];
        1: br_target = jump_hi[$urandom_range(0, NJ-1)];
        2: br_target = jump_hi[$urandom_range(0, NJ-1)] - 4;
        default: br_target = {32'h0, $urandom};
      endcase
      check("random");
    end
    checks++;
    if (n_fault == 0) begin failures++; $display("FAIL no fault seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
