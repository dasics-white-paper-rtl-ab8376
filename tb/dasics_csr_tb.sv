// dasics_csr_tb -- self-checking test of the DASICS CSR file.
// Checks, clock by clock: reset clears all registers; every memory and jump
// bound register and both cfg words can be written and read back at their
// addresses; the S-mode zone is writable only from M-mode and the U-mode
// zone only from S- or M-mode; untrusted code is refused everywhere (no
// write happens, csr_illegal is raised); a trusted dasicscall.jr loads the
// return PC one edge later; unknown addresses are not claimed.
module dasics_csr_tb;
  import dasics_pkg::*;
  localparam int NM = 16, NJ = 4;

  logic        clk = 0, rst_n;
  priv_e       priv;
  logic        csr_valid, csr_we, csr_untrusted, csr_hit, csr_illegal;
  logic [11:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  logic        call_valid;
  logic [63:0] call_ret_pc;
  logic        smain_en, umain_en;
  logic [63:0] smain_lo, smain_hi, umain_lo, umain_hi, maincall, retpc;
  logic [63:0] mem_lo [NM];
  logic [63:0] mem_hi [NM];
  mem_cfg_t    mem_cfg [NM];
  logic [63:0] jump_lo [NJ];
  logic [63:0] jump_hi [NJ];
  jump_cfg_t   jump_cfg [NJ];
  int checks = 0, failures = 0;

  dasics_csr dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // one CSR access; returns read data and the illegal flag seen
  task automatic csr(logic [11:0] a, logic we, logic [63:0] d, logic untr,
                     output logic [63:0] rd, output logic ill);
    @(negedge clk);
    csr_valid = 1; csr_addr = a; csr_we = we; csr_wdata = d; csr_untrusted = untr;
    #1; rd = csr_rdata; ill = csr_illegal;
    @(posedge clk); #1;
    csr_valid = 0; csr_we = 0;
  endtask

  logic [63:0] rd;
  logic        ill;

  initial begin
    rst_n = 0; priv = PRIV_M; csr_valid = 0; csr_we = 0; csr_untrusted = 0;
    csr_addr = 0; csr_wdata = 0; call_valid = 0; call_ret_pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(!smain_en && !umain_en && retpc == 0 && mem_cfg[3] == '0 && jump_hi[2] == 0, "reset");

    // M-mode writes everything
    csr(CSR_SMAIN_LO, 1, 64'h8000_0000, 0, rd, ill); chk(!ill && smain_lo == 64'h8000_0000, "M writes smain lo");
    csr(CSR_SMAIN_HI, 1, 64'h8010_0000, 0, rd, ill); chk(smain_hi == 64'h8010_0000, "M writes smain hi");
    csr(CSR_SMAIN_CFG, 1, 64'h1, 0, rd, ill);        chk(smain_en, "M enables S protection");
    for (int i = 0; i < NM; i++) begin
      csr(CSR_MEM_BASE + 12'(2*i),     1, 64'h1000 * i,        0, rd, ill);
      csr(CSR_MEM_BASE + 12'(2*i + 1), 1, 64'h1000 * i + 'h80, 0, rd, ill);
    end
    for (int i = 0; i < NJ; i++) begin
      csr(CSR_JUMP_BASE + 12'(2*i),     1, 64'hbbfe_0000 + 64'h10000 * i, 0, rd, ill);
      csr(CSR_JUMP_BASE + 12'(2*i + 1), 1, 64'hbbfe_1000 + 64'h10000 * i, 0, rd, ill);
    end
    csr(CSR_MEM_CFG,  1, 64'h7654_3210_7654_3210, 0, rd, ill);
    csr(CSR_JUMP_CFG, 1, 64'h0000_0000_0000_3210, 0, rd, ill);
    for (int i = 0; i < NM; i++) begin
      chk(mem_lo[i] == 64'h1000 * i && mem_hi[i] == 64'h1000 * i + 'h80, $sformatf("mem bound %0d", i));
      chk(mem_cfg[i] == 3'(i % 8), $sformatf("mem cfg %0d", i));
      csr(CSR_MEM_BASE + 12'(2*i + 1), 0, 0, 0, rd, ill);
      chk(rd == 64'h1000 * i + 'h80, $sformatf("read mem hi %0d", i));
    end
    for (int i = 0; i < NJ; i++) begin
      chk(jump_lo[i] == 64'hbbfe_0000 + 64'h10000 * i && jump_hi[i] == 64'hbbfe_1000 + 64'h10000 * i,
          $sformatf("jump bound %0d", i));
      chk(jump_cfg[i] == 2'(i), $sformatf("jump cfg %0d", i));
    end
    csr(CSR_MEM_CFG, 0, 0, 0, rd, ill);
    chk(rd == 64'h7654_3210_7654_3210, "mem cfg reads back");
    csr(CSR_JUMP_CFG, 0, 0, 0, rd, ill); chk(rd == 64'h3210, "jump cfg reads back");

    // S-mode: cannot touch the S zone, can set the U zone
    priv = PRIV_S;
    csr(CSR_SMAIN_LO, 1, 64'h0, 0, rd, ill); chk(ill && smain_lo == 64'h8000_0000, "S cannot write smain");
    csr(CSR_SMAIN_LO, 0, 64'h0, 0, rd, ill); chk(ill && rd == 0, "S cannot read smain");
    csr(CSR_UMAIN_LO, 1, 64'h6000_0000, 0, rd, ill); chk(!ill && umain_lo == 64'h6000_0000, "S writes umain lo");
    csr(CSR_UMAIN_HI, 1, 64'h6001_0000, 0, rd, ill); chk(umain_hi == 64'h6001_0000, "S writes umain hi");
    csr(CSR_UMAIN_CFG, 1, 64'h1, 0, rd, ill); chk(umain_en, "S enables U protection");
    csr(CSR_UMAIN_HI, 1, 64'h0, 1, rd, ill); chk(ill && umain_hi == 64'h6001_0000, "untrusted S refused");

    // U-mode: no zone access; trusted U code may set bounds and entry
    priv = PRIV_U;
    csr(CSR_UMAIN_LO, 1, 64'h0, 0, rd, ill); chk(ill && umain_lo == 64'h6000_0000, "U cannot write umain");
    csr(CSR_MAINCALL, 1, 64'h6000_8000, 0, rd, ill); chk(!ill && maincall == 64'h6000_8000, "trusted U writes maincall");
    csr(CSR_MEM_BASE, 1, 64'hdead, 1, rd, ill); chk(ill && mem_lo[0] == 0, "untrusted U refused bound write");
    csr(CSR_MAINCALL, 0, 64'h0, 1, rd, ill); chk(ill && rd == 0, "untrusted U refused read");
    csr(CSR_MEM_CFG, 1, 64'h0, 1, rd, ill); chk(ill && mem_cfg[1] == 3'd1, "untrusted U refused cfg write");

    // unknown address not claimed
    @(negedge clk); csr_valid = 1; csr_addr = 12'h300; csr_we = 0; #1;
    chk(!csr_hit && !csr_illegal, "mstatus not a DASICS CSR"); csr_valid = 0;
    csr_addr = CSR_MEM_BASE - 12'd1; csr_valid = 1; #1;
    chk(!csr_hit, "address below the bound window not claimed");
    csr_addr = CSR_JUMP_CFG + 12'd1; #1;
    chk(!csr_hit, "address past the jump window not claimed"); csr_valid = 0;

    // return PC capture
    @(negedge clk); call_valid = 1; call_ret_pc = 64'h6000_0104; #1;
    chk(retpc != 64'h6000_0104, "return pc not before the edge");
    @(posedge clk); #1; call_valid = 0;
    chk(retpc == 64'h6000_0104, "return pc loaded");
    csr(CSR_RETPC, 0, 0, 0, rd, ill); chk(rd == 64'h6000_0104, "return pc read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
