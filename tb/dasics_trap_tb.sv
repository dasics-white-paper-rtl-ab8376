// dasics_trap_tb -- self-checking test of DASICS exception delivery.
// U-mode: each violation kind and an intercepted ecall redirect fetch to
// utvec in the same cycle and load uepc/ucause/utval at the next edge;
// uret returns to uepc. S-mode: the same events become a supervisor trap
// request with the S-level cause and nothing in the user registers changes.
// A trusted ecall passes to the host. Untrusted code cannot touch the user
// trap registers. Expected cause codes are written out here as numbers.
module dasics_trap_tb;
  import dasics_pkg::*;

  logic        clk = 0, rst_n;
  priv_e       priv;
  logic        csr_valid, csr_we, csr_untrusted, csr_hit, csr_illegal;
  logic [11:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  logic        exc_valid;
  viol_e       exc_kind;
  logic [63:0] exc_pc, exc_tval;
  logic        ecall_valid, ecall_untrusted, ecall_pass;
  logic [63:0] ecall_pc;
  logic        uret_valid, redirect_valid, strap_valid;
  logic [63:0] redirect_pc, strap_cause, strap_epc, strap_tval;
  int checks = 0, failures = 0;

  dasics_trap dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic csr(logic [11:0] a, logic we, logic [63:0] d, logic untr,
                     output logic [63:0] rd, output logic ill);
    @(negedge clk);
    csr_valid = 1; csr_addr = a; csr_we = we; csr_wdata = d; csr_untrusted = untr;
    #1; rd = csr_rdata; ill = csr_illegal;
    @(posedge clk); #1;
    csr_valid = 0; csr_we = 0;
  endtask

  // one committing violation; checks the same-cycle response
  task automatic viol(viol_e k, logic [63:0] pc, logic [63:0] tval,
                      logic exp_redirect, logic exp_strap, logic [63:0] exp_cause);
    @(negedge clk);
    exc_valid = 1; exc_kind = k; exc_pc = pc; exc_tval = tval; #1;
    chk(redirect_valid == exp_redirect, $sformatf("redirect for kind %0d", k));
    if (exp_redirect) chk(redirect_pc == 64'h6000_4000, "redirect to utvec");
    chk(strap_valid == exp_strap, $sformatf("strap for kind %0d", k));
    if (exp_strap) chk(strap_cause == exp_cause && strap_epc == pc && strap_tval == tval, "strap fields");
    @(posedge clk); #1; exc_valid = 0;
  endtask

  logic [63:0] rd;
  logic        ill;

  initial begin
    rst_n = 0; priv = PRIV_U; csr_valid = 0; csr_we = 0; csr_untrusted = 0; csr_addr = 0;
    csr_wdata = 0; exc_valid = 0; exc_kind = VIOL_JUMP; exc_pc = 0; exc_tval = 0;
    ecall_valid = 0; ecall_untrusted = 0; ecall_pc = 0; uret_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // trusted U code registers the handler (mode bits are ignored)
    csr(CSR_UTVEC, 1, 64'h6000_4001, 0, rd, ill); chk(!ill, "trusted utvec write");
    csr(CSR_UTVEC, 1, 64'hbad0_0000, 1, rd, ill); chk(ill, "untrusted utvec write refused");
    csr(CSR_UTVEC, 0, 0, 0, rd, ill);             chk(rd == 64'h6000_4001, "utvec unchanged");
    csr(CSR_USCRATCH, 1, 64'h55, 0, rd, ill);
    csr(CSR_USCRATCH, 0, 0, 0, rd, ill);          chk(rd == 64'h55, "uscratch");

    // U-mode violations
    viol(VIOL_LOAD, 64'hbbfe_0010, 64'h3f00, 1, 0, 0);
    csr(CSR_UCAUSE, 0, 0, 0, rd, ill); chk(rd == 64'd26, "U load cause 26");
    csr(CSR_UEPC, 0, 0, 0, rd, ill);   chk(rd == 64'hbbfe_0010, "uepc");
    csr(CSR_UTVAL, 0, 0, 0, rd, ill);  chk(rd == 64'h3f00, "utval");
    viol(VIOL_STORE, 64'hbbfe_0020, 64'h3ff8, 1, 0, 0);
    csr(CSR_UCAUSE, 0, 0, 0, rd, ill); chk(rd == 64'd28, "U store cause 28");
    viol(VIOL_JUMP, 64'hbbfe_0030, 64'h6000_0108, 1, 0, 0);
    csr(CSR_UCAUSE, 0, 0, 0, rd, ill); chk(rd == 64'd24, "U jump cause 24");
    csr(CSR_UCAUSE, 0, 0, 1, rd, ill); chk(ill && rd == 0, "untrusted ucause read refused");

    // intercepted ecall
    @(negedge clk); ecall_valid = 1; ecall_untrusted = 1; ecall_pc = 64'hbbfe_0044; #1;
    chk(redirect_valid && redirect_pc == 64'h6000_4000 && !ecall_pass, "untrusted ecall intercepted");
    @(posedge clk); #1; ecall_valid = 0;
    csr(CSR_UCAUSE, 0, 0, 0, rd, ill); chk(rd == 64'd30, "U ecall cause 30");
    csr(CSR_UEPC, 0, 0, 0, rd, ill);   chk(rd == 64'hbbfe_0044, "ecall uepc");
    // trusted ecall goes to the OS
    @(negedge clk); ecall_valid = 1; ecall_untrusted = 0; #1;
    chk(ecall_pass && !redirect_valid && !strap_valid, "trusted ecall passes");
    @(posedge clk); #1; ecall_valid = 0;

    // handler emulates and skips the ecall: uepc += 4, uret
    csr(CSR_UEPC, 1, 64'hbbfe_0048, 0, rd, ill);
    @(negedge clk); uret_valid = 1; #1;
    chk(redirect_valid && redirect_pc == 64'hbbfe_0048, "uret to uepc");
    @(posedge clk); #1; uret_valid = 0;

    // S-mode: supervisor trap request, user registers untouched
    priv = PRIV_S;
    viol(VIOL_LOAD,  64'hffff_0010, 64'h1, 0, 1, 64'd27);
    viol(VIOL_STORE, 64'hffff_0020, 64'h2, 0, 1, 64'd29);
    viol(VIOL_JUMP,  64'hffff_0030, 64'h3, 0, 1, 64'd25);
    @(negedge clk); ecall_valid = 1; ecall_untrusted = 1; ecall_pc = 64'hffff_0040; #1;
    chk(strap_valid && strap_cause == 64'd31 && !redirect_valid, "S ecall intercepted");
    @(posedge clk); #1; ecall_valid = 0;
    csr(CSR_UEPC, 0, 0, 0, rd, ill); chk(rd == 64'hbbfe_0048, "S traps leave uepc alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
