// dasics_top_tb -- end-to-end test of the DASICS logic at its default size
// (64-bit, 16 memory bounds, 4 jump bounds, 16-wide fetch packet, two load
// and two store ports).
//
// The testbench plays the host core: it fetches each instruction through
// the tagger, hands the tag to the checker the instruction needs, and, like
// a reorder buffer, commits a faulting instruction on exc_* and follows
// any redirect. It runs:
//   1. the protected library call of the paper's first case study: trusted
//      main sets up the U-mode trusted zone, memory bounds and an active
//      zone, calls lib_function with dasicscall.jr; the library reads its
//      buffer, then tries to read stack_secret_data, overwrite the saved
//      return address, branch and jump into main, rewrite a bound register,
//      and finally returns legally (and once with a forged address);
//   2. the system call interception of the second case study: untrusted
//      code issues openat, getdents64 and fstatat; each is turned into a
//      U-level DASICS exception, the trusted handler checks it, performs
//      the call itself and returns with uret;
//   3. the same protection one level up: an S-mode driver outside the
//      S-mode trusted zone faults into the supervisor, and only M-mode may
//      set the S-mode zone.
// Each mechanism is counted; one that never happens is a failure.
module dasics_top_tb;
  import dasics_pkg::*;

  localparam int FW = 16;

  logic              clk = 0, rst_n;
  priv_e             priv;
  logic [63:0]       fetch_pc [FW];
  logic [FW-1:0]     fetch_untrusted;
  logic              br_valid, br_untrusted, br_fault;
  logic [63:0]       br_target;
  logic              jmp_valid, jmp_untrusted, jmp_is_dasicscall, jmp_fault;
  logic [63:0]       jmp_pc, jmp_target;
  logic [1:0]        ld_valid, ld_untrusted, ld_fault;
  logic [63:0]       ld_vaddr [2];
  logic [1:0]        ld_size  [2];
  logic [1:0]        st_valid, st_untrusted, st_fault;
  logic [63:0]       st_vaddr [2];
  logic [1:0]        st_size  [2];
  logic              csr_valid, csr_we, csr_untrusted, csr_hit, csr_illegal;
  logic [11:0]       csr_addr;
  logic [63:0]       csr_wdata, csr_rdata;
  logic              exc_valid;
  viol_e             exc_kind;
  logic [63:0]       exc_pc, exc_tval;
  logic              ecall_valid, ecall_untrusted, ecall_pass, uret_valid;
  logic [63:0]       ecall_pc;
  logic              redirect_valid, strap_valid;
  logic [63:0]       redirect_pc, strap_cause, strap_epc, strap_tval;

  dasics_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters
  typedef enum int {
    M_TAG_TRUSTED, M_TAG_UNTRUSTED, M_MEM_PASS, M_LOAD_FAULT, M_STORE_FAULT,
    M_BRANCH_PASS, M_BRANCH_FAULT, M_DASICSCALL, M_LEGAL_RETURN, M_TRUSTED_CALL,
    M_JUMP_FAULT, M_CSR_REFUSED, M_U_TRAP, M_S_TRAP, M_ECALL_INTERCEPT,
    M_ECALL_PASS, M_URET, M_NUM
  } mech_e;
  int mech [M_NUM];

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (cycle %0d)", what, cycles); end
  endtask

  // ---- address map of the scenario
  localparam logic [63:0] MAIN_LO   = 64'h6000_0000;   // U trusted zone (block diagram)
  localparam logic [63:0] MAIN_HI   = 64'h6001_0000;
  localparam logic [63:0] HANDLER   = 64'h6000_4000;   // DASICS exception handler
  localparam logic [63:0] TCALL     = 64'h6000_8000;   // trusted-call entry
  localparam logic [63:0] LIB_LO    = 64'hbbfe_0000;   // lib_function code (block diagram)
  localparam logic [63:0] LIB_HI    = 64'hbbfe_1000;
  // main's stack frame
  localparam logic [63:0] REG_SAVE  = 64'h7fff_eff0;   // saved return address
  localparam logic [63:0] SECRET    = 64'h7fff_ef00;   // stack_secret_data
  localparam logic [63:0] BUF_LO    = 64'h7fff_ee00;   // stack_buffer
  localparam logic [63:0] BUF_HI    = 64'h7fff_ef00;
  localparam logic [63:0] LSTK_LO   = 64'h7fff_d000;   // lib_function's own stack
  localparam logic [63:0] LSTK_HI   = 64'h7fff_ee00;

  // ---- core helpers
  // fetch one instruction at pc (with 15 more in the packet); returns its tag
  task automatic fetch(logic [63:0] pc, output logic untr);
    for (int i = 0; i < FW; i++) fetch_pc[i] = pc + 64'(4 * i);
    #1 untr = fetch_untrusted[0];
    mech[untr ? M_TAG_UNTRUSTED : M_TAG_TRUSTED]++;
  endtask

  // commit a faulting instruction like the ROB does, check the delivery
  task automatic commit_violation(viol_e k, logic [63:0] pc, logic [63:0] tval,
                                  logic [63:0] exp_cause);
    @(negedge clk);
    exc_valid = 1; exc_kind = k; exc_pc = pc; exc_tval = tval; #1;
    if (priv == PRIV_U) begin
      chk(redirect_valid && redirect_pc == HANDLER, "U-level trap enters handler");
      if (redirect_valid) mech[M_U_TRAP]++;
    end else begin
      chk(strap_valid && strap_cause == exp_cause && strap_epc == pc, "S-level trap request");
      if (strap_valid) mech[M_S_TRAP]++;
    end
    @(posedge clk); #1; exc_valid = 0;
  endtask

  task automatic csr_access(logic [63:0] pc, logic [11:0] a, logic we, logic [63:0] d,
                            output logic [63:0] rd, output logic ill);
    logic untr;
    @(negedge clk);
    fetch(pc, untr);
    csr_valid = 1; csr_addr = a; csr_we = we; csr_wdata = d; csr_untrusted = untr; #1;
    rd = csr_rdata; ill = csr_illegal;
    if (ill) mech[M_CSR_REFUSED]++;
    @(posedge clk); #1; csr_valid = 0; csr_we = 0;
  endtask

  task automatic csr_write(logic [63:0] pc, logic [11:0] a, logic [63:0] d);
    logic [63:0] rd; logic ill;
    csr_access(pc, a, 1, d, rd, ill);
    chk(!ill, $sformatf("csr write %h accepted", a));
  endtask

  // load on port p / store on port p; returns fault and commits it
  task automatic mem_op(logic [63:0] pc, logic st, int p, logic [63:0] a, logic exp_fault,
                        string what);
    logic untr, f;
    @(negedge clk);
    fetch(pc, untr);
    if (st) begin st_valid[p] = 1; st_untrusted[p] = untr; st_vaddr[p] = a; st_size[p] = 3; end
    else    begin ld_valid[p] = 1; ld_untrusted[p] = untr; ld_vaddr[p] = a; ld_size[p] = 3; end
    #1 f = st ? st_fault[p] : ld_fault[p];
    chk(f == exp_fault, what);
    @(posedge clk); #1; ld_valid = 0; st_valid = 0;
    if (f) begin
      mech[st ? M_STORE_FAULT : M_LOAD_FAULT]++;
      commit_violation(st ? VIOL_STORE : VIOL_LOAD, pc, a,
                       priv == PRIV_S ? (st ? 64'd29 : 64'd27) : 64'd0);
    end else mech[M_MEM_PASS]++;
  endtask

  task automatic branch(logic [63:0] pc, logic [63:0] tgt, logic exp_fault, string what);
    logic untr;
    @(negedge clk);
    fetch(pc, untr);
    br_valid = 1; br_untrusted = untr; br_target = tgt; #1;
    chk(br_fault == exp_fault, what);
    mech[br_fault ? M_BRANCH_FAULT : M_BRANCH_PASS]++;
    @(posedge clk); #1; br_valid = 0;
    if (exp_fault) commit_violation(VIOL_JUMP, pc, tgt, 0);
  endtask

  task automatic jump(logic [63:0] pc, logic [63:0] tgt, logic dcall, logic exp_fault,
                      string what);
    logic untr;
    @(negedge clk);
    fetch(pc, untr);
    jmp_valid = 1; jmp_untrusted = untr; jmp_is_dasicscall = dcall; jmp_pc = pc; jmp_target = tgt; #1;
    chk(jmp_fault == exp_fault, what);
    @(posedge clk); #1; jmp_valid = 0; jmp_is_dasicscall = 0;
    if (jmp_fault) begin
      mech[M_JUMP_FAULT]++;
      commit_violation(VIOL_JUMP, pc, tgt, priv == PRIV_S ? 64'd25 : 64'd0);
    end
  endtask

  // an ecall at pc; returns whether it was intercepted
  task automatic ecall(logic [63:0] pc, output logic intercepted);
    logic untr;
    @(negedge clk);
    fetch(pc, untr);
    ecall_valid = 1; ecall_untrusted = untr; ecall_pc = pc; #1;
    intercepted = redirect_valid || strap_valid;
    if (intercepted) mech[M_ECALL_INTERCEPT]++;
    if (intercepted && priv == PRIV_S) chk(strap_cause == 64'd31, "S-level ecall cause");
    if (ecall_pass) mech[M_ECALL_PASS]++;
    chk(intercepted != ecall_pass, "ecall either intercepted or passed");
    @(posedge clk); #1; ecall_valid = 0;
  endtask

  task automatic uret_to(logic [63:0] exp_pc);
    @(negedge clk); uret_valid = 1; #1;
    chk(redirect_valid && redirect_pc == exp_pc, "uret returns to uepc");
    if (redirect_valid) mech[M_URET]++;
    @(posedge clk); #1; uret_valid = 0;
  endtask

  logic [63:0] rd;
  logic        ill, untr, icpt;
  int          syscall_nr [3] = '{56, 61, 79};   // openat, getdents64, fstatat (RV64 Linux)
  int          start_cycle;

  initial begin
    rst_n = 0; priv = PRIV_M;
    for (int i = 0; i < FW; i++) fetch_pc[i] = 0;
    br_valid = 0; br_untrusted = 0; br_target = 0;
    jmp_valid = 0; jmp_untrusted = 0; jmp_is_dasicscall = 0; jmp_pc = 0; jmp_target = 0;
    ld_valid = 0; ld_untrusted = 0; st_valid = 0; st_untrusted = 0;
    for (int i = 0; i < 2; i++) begin ld_vaddr[i] = 0; ld_size[i] = 0; st_vaddr[i] = 0; st_size[i] = 0; end
    csr_valid = 0; csr_we = 0; csr_untrusted = 0; csr_addr = 0; csr_wdata = 0;
    exc_valid = 0; exc_kind = VIOL_JUMP; exc_pc = 0; exc_tval = 0;
    ecall_valid = 0; ecall_untrusted = 0; ecall_pc = 0; uret_valid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    start_cycle = cycles;

    // ================= 1. protected library call (U-mode) =================
    // the OS (S-mode) loads the program and sets its trusted zone
    priv = PRIV_S;
    csr_write(64'hffff_ffff_8000_0000, CSR_UMAIN_LO, MAIN_LO);
    csr_write(64'hffff_ffff_8000_0004, CSR_UMAIN_HI, MAIN_HI);
    csr_write(64'hffff_ffff_8000_0008, CSR_UMAIN_CFG, 64'h1);
    priv = PRIV_U;
    // main (trusted) may not move its own zone
    csr_access(MAIN_LO + 'h10, CSR_UMAIN_HI, 1, 64'hffff_ffff, rd, ill);
    chk(ill, "U-mode code cannot set the U trusted zone");
    // main configures the library's permissions
    csr_write(MAIN_LO + 'h20, CSR_UTVEC, HANDLER);
    csr_write(MAIN_LO + 'h24, CSR_MAINCALL, TCALL);
    csr_write(MAIN_LO + 'h28, CSR_MEM_BASE + 0, BUF_LO);
    csr_write(MAIN_LO + 'h2c, CSR_MEM_BASE + 1, BUF_HI);
    csr_write(MAIN_LO + 'h30, CSR_MEM_BASE + 2, LSTK_LO);
    csr_write(MAIN_LO + 'h34, CSR_MEM_BASE + 3, LSTK_HI);
    csr_write(MAIN_LO + 'h38, CSR_MEM_CFG, 64'h77);          // bounds 0,1: V R W
    csr_write(MAIN_LO + 'h3c, CSR_JUMP_BASE + 0, LIB_LO);
    csr_write(MAIN_LO + 'h40, CSR_JUMP_BASE + 1, LIB_HI);
    csr_write(MAIN_LO + 'h44, CSR_JUMP_CFG, 64'h3);          // jump bound 0: V X
    // tagger: packet straddling the zone end
    @(negedge clk);
    for (int i = 0; i < FW; i++) fetch_pc[i] = MAIN_HI - 64'h20 + 64'(4 * i);
    #1 chk(fetch_untrusted == 16'hff00, "packet tags across the zone end");
    // main stores into the secret area itself: trusted, unchecked
    mem_op(MAIN_LO + 'h48, 1, 0, SECRET, 0, "main writes its own secret");
    // dasicscall.jr lib_function
    jump(MAIN_LO + 'h100, LIB_LO, 1, 0, "dasicscall.jr into the library");
    mech[M_DASICSCALL]++;
    csr_access(LIB_LO + 'h2c, CSR_RETPC, 0, 0, rd, ill);
    chk(ill && rd == 0, "library cannot read the return PC");
    // library body
    mem_op(LIB_LO + 'h00, 0, 0, BUF_LO + 'h40, 0, "lib reads stack_buffer (load port 0)");
    mem_op(LIB_LO + 'h04, 0, 1, BUF_HI - 8,    0, "lib reads stack_buffer end (load port 1)");
    mem_op(LIB_LO + 'h08, 1, 1, LSTK_LO + 'h8, 0, "lib writes its own stack (store port 1)");
    branch(LIB_LO + 'h0c, LIB_LO + 'h40, 0, "lib branches inside its zone");
    mem_op(LIB_LO + 'h10, 0, 1, SECRET, 1, "lib reads stack_secret_data");
    csr_access(HANDLER, CSR_UCAUSE, 0, 0, rd, ill);
    chk(!ill && rd == 64'd26, "handler sees load cause");
    mem_op(LIB_LO + 'h14, 1, 0, REG_SAVE + 8, 1, "lib overwrites saved return address");
    csr_access(HANDLER, CSR_UCAUSE, 0, 0, rd, ill);
    chk(rd == 64'd28, "handler sees store cause");
    branch(LIB_LO + 'h18, MAIN_LO + 'h200, 1, "lib branches into main");
    csr_access(LIB_LO + 'h1c, CSR_MEM_CFG, 1, 64'h7777, rd, ill);
    chk(ill, "lib cannot widen its own bounds");
    jump(LIB_LO + 'h20, TCALL, 0, 0, "lib uses the trusted-call entry");
    mech[M_TRUSTED_CALL]++;
    jump(LIB_LO + 'h24, MAIN_LO + 'h108, 0, 1, "lib returns to a forged address");
    csr_access(HANDLER, CSR_UCAUSE, 0, 0, rd, ill);
    chk(rd == 64'd24, "handler sees jump cause");
    csr_access(HANDLER, CSR_RETPC, 0, 0, rd, ill);
    chk(!ill && rd == MAIN_LO + 'h104, "return PC recorded by dasicscall.jr");
    jump(LIB_LO + 'h28, MAIN_LO + 'h104, 0, 0, "lib returns legally");
    mech[M_LEGAL_RETURN]++;

    // ================= 2. system call interception (U-mode) =================
    for (int s = 0; s < 3; s++) begin
      logic [63:0] epc;
      epc = LIB_LO + 'h300 + 64'(16 * s);
      ecall(epc, icpt);
      chk(icpt, $sformatf("syscall %0d from untrusted code intercepted", syscall_nr[s]));
      csr_access(HANDLER, CSR_UCAUSE, 0, 0, rd, ill);
      chk(rd == 64'd30, "handler sees ecall cause");
      csr_access(HANDLER + 4, CSR_UEPC, 0, 0, rd, ill);
      chk(rd == epc, "handler sees ecall pc");
      // arguments pass the check: the trusted handler performs the call
      ecall(HANDLER + 8, icpt);
      chk(!icpt, "trusted handler's own ecall goes to the OS");
      csr_write(HANDLER + 12, CSR_UEPC, epc + 4);
      uret_to(epc + 4);
    end

    // ================= 3. kernel driver (S-mode) =================
    priv = PRIV_S;
    csr_access(64'hffff_ffff_8000_0010, CSR_SMAIN_LO, 1, 0, rd, ill);
    chk(ill, "S-mode cannot set its own trusted zone");
    priv = PRIV_M;
    csr_write(64'h8000_0000, CSR_SMAIN_LO, 64'hffff_ffff_8000_0000);
    csr_write(64'h8000_0004, CSR_SMAIN_HI, 64'hffff_ffff_8100_0000);
    csr_write(64'h8000_0008, CSR_SMAIN_CFG, 64'h1);
    priv = PRIV_S;
    // kernel grants the driver one read-only window (bound 2)
    csr_write(64'hffff_ffff_8000_0100, CSR_MEM_BASE + 4, 64'hffff_ffff_9000_0000);
    csr_write(64'hffff_ffff_8000_0104, CSR_MEM_BASE + 5, 64'hffff_ffff_9000_1000);
    csr_write(64'hffff_ffff_8000_0108, CSR_MEM_CFG, 64'h377);
    mem_op(64'hffff_ffff_c000_0000, 0, 0, 64'hffff_ffff_9000_0800, 0, "driver reads its window");
    mem_op(64'hffff_ffff_c000_0004, 1, 1, 64'hffff_ffff_9000_0800, 1, "driver writes read-only window");
    mem_op(64'hffff_ffff_c000_0008, 0, 1, 64'hffff_ffff_8000_2000, 1, "driver reads kernel data");
    jump(64'hffff_ffff_c000_000c, 64'hffff_ffff_8000_3000, 0, 1, "driver jumps into the kernel");
    ecall(64'hffff_ffff_c000_0010, icpt);
    chk(icpt, "driver ecall intercepted to S level");

    // ================= mechanism coverage =================
    for (int m = 0; m < M_NUM; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("  %-20s %0d", me.name(), mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism %s happened", me.name()));
    end
    $display("end-to-end run took %0d cycles", cycles - start_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
