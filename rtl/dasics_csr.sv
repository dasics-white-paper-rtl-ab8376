// dasics_csr -- the DASICS control and status registers.
//
// Holds every piece of DASICS configuration: the trusted ("main") zone and
// protection toggle of S-mode and of U-mode, 16 memory bound registers with
// their V/R/W bits, 4 jump (active zone) bound registers with their V/X bits,
// the trusted-call entry address and the return PC saved by dasicscall.jr.
// The checkers read these registers directly (the "CSR update" wires).
//
// Access rules (from the paper): the S-mode trusted zone can only be set
// from M-mode, the U-mode trusted zone only from S-mode or above, and any
// access from code tagged untrusted is refused with an illegal-instruction
// indication. Here reads obey the same rules as writes.
//
// Interface: one CSR access port (csr_valid, csr_addr, csr_we, csr_wdata,
// priv, csr_untrusted). csr_hit says the address belongs to this file,
// csr_illegal that the access is refused, csr_rdata is the read value; all
// three are combinational. An accepted write takes effect at the next rising
// clock edge. call_valid/call_ret_pc (from the jump checker, trusted
// dasicscall.jr only) load the return-PC register at the same edge; a CSR
// write to the return-PC register in the same cycle wins.
// Reset (active-low, synchronous) clears everything, so protection is off.
// The address map and cfg bit packing are this design's own choice (see
// dasics_pkg).
module dasics_csr
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN     = dasics_pkg::DEF_XLEN,
  parameter int unsigned NUM_MEM  = dasics_pkg::DEF_NUM_MEM,
  parameter int unsigned NUM_JUMP = dasics_pkg::DEF_NUM_JUMP
) (
  input  logic            clk,
  input  logic            rst_n,
  input  priv_e           priv,
  // CSR access port
  input  logic            csr_valid,
  input  logic [11:0]     csr_addr,
  input  logic            csr_we,
  input  logic [XLEN-1:0] csr_wdata,
  input  logic            csr_untrusted,
  output logic            csr_hit,
  output logic            csr_illegal,
  output logic [XLEN-1:0] csr_rdata,
  // return-PC capture by trusted dasicscall.jr
  input  logic            call_valid,
  input  logic [XLEN-1:0] call_ret_pc,
  // configuration out
  output logic            smain_en,
  output logic [XLEN-1:0] smain_lo,
  output logic [XLEN-1:0] smain_hi,
  output logic            umain_en,
  output logic [XLEN-1:0] umain_lo,
  output logic [XLEN-1:0] umain_hi,
  output logic [XLEN-1:0] mem_lo   [NUM_MEM],
  output logic [XLEN-1:0] mem_hi   [NUM_MEM],
  output mem_cfg_t        mem_cfg  [NUM_MEM],
  output logic [XLEN-1:0] jump_lo  [NUM_JUMP],
  output logic [XLEN-1:0] jump_hi  [NUM_JUMP],
  output jump_cfg_t       jump_cfg [NUM_JUMP],
  output logic [XLEN-1:0] maincall,
  output logic [XLEN-1:0] retpc
);

  initial begin
    assert (4 * NUM_MEM <= XLEN && 4 * NUM_JUMP <= XLEN)
      else $error("cfg nibbles must fit in one CSR");
    assert (2 * NUM_MEM <= 32 && 2 * NUM_JUMP <= 8)
      else $error("bound registers overflow their CSR address window");
  end

  // ---------------------------------------------------------------- decode
  typedef enum logic [3:0] {
    R_NONE, R_SMAIN_CFG, R_SMAIN_LO, R_SMAIN_HI, R_UMAIN_CFG, R_UMAIN_LO,
    R_UMAIN_HI, R_MEM_CFG, R_MEM_BOUND, R_MAINCALL, R_RETPC, R_JUMP_BOUND,
    R_JUMP_CFG
  } reg_e;

  localparam int unsigned MIW = (NUM_MEM  > 1) ? $clog2(NUM_MEM)  : 1;
  localparam int unsigned JIW = (NUM_JUMP > 1) ? $clog2(NUM_JUMP) : 1;

  reg_e        sel;
  logic [3:0]  idx;     // bound index
  logic        hi_sel;  // 1: upper bound of the pair

  always_comb begin
    sel    = R_NONE;
    idx    = csr_addr[4:1];
    hi_sel = csr_addr[0];
    unique case (csr_addr)
      CSR_SMAIN_CFG: sel = R_SMAIN_CFG;
      CSR_SMAIN_LO:  sel = R_SMAIN_LO;
      CSR_SMAIN_HI:  sel = R_SMAIN_HI;
      CSR_UMAIN_CFG: sel = R_UMAIN_CFG;
      CSR_UMAIN_LO:  sel = R_UMAIN_LO;
      CSR_UMAIN_HI:  sel = R_UMAIN_HI;
      CSR_MEM_CFG:   sel = R_MEM_CFG;
      CSR_MAINCALL:  sel = R_MAINCALL;
      CSR_RETPC:     sel = R_RETPC;
      CSR_JUMP_CFG:  sel = R_JUMP_CFG;
      default: begin
        if (csr_addr >= CSR_MEM_BASE && csr_addr < CSR_MEM_BASE + 12'(2 * NUM_MEM)) begin
          sel = R_MEM_BOUND;
          idx = 4'((csr_addr - CSR_MEM_BASE) >> 1);
        end else if (csr_addr >= CSR_JUMP_BASE &&
                     csr_addr < CSR_JUMP_BASE + 12'(2 * NUM_JUMP)) begin
          sel = R_JUMP_BOUND;
          idx = 4'((csr_addr - CSR_JUMP_BASE) >> 1);
        end
      end
    endcase
  end

  // ----------------------------------------------------------- permission
  logic allowed;
  always_comb begin
    unique case (sel)
      R_SMAIN_CFG, R_SMAIN_LO, R_SMAIN_HI: allowed = (priv == PRIV_M);
      R_UMAIN_CFG, R_UMAIN_LO, R_UMAIN_HI:
        allowed = (priv == PRIV_M) || (priv == PRIV_S && !csr_untrusted);
      default: allowed = !csr_untrusted;
    endcase
  end

  assign csr_hit     = csr_valid && (sel != R_NONE);
  assign csr_illegal = csr_hit && !allowed;

  logic wr;
  assign wr = csr_hit && allowed && csr_we;

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      smain_en <= 1'b0;
      smain_lo <= '0;
      smain_hi <= '0;
      umain_en <= 1'b0;
      umain_lo <= '0;
      umain_hi <= '0;
      maincall <= '0;
      retpc    <= '0;
      for (int i = 0; i < NUM_MEM; i++) begin
        mem_lo[i]  <= '0;
        mem_hi[i]  <= '0;
        mem_cfg[i] <= '0;
      end
      for (int i = 0; i < NUM_JUMP; i++) begin
        jump_lo[i]  <= '0;
        jump_hi[i]  <= '0;
        jump_cfg[i] <= '0;
      end
    end else begin
      if (call_valid) retpc <= call_ret_pc;
      if (wr) begin
        unique case (sel)
          R_SMAIN_CFG: smain_en <= csr_wdata[0];
          R_SMAIN_LO:  smain_lo <= csr_wdata;
          R_SMAIN_HI:  smain_hi <= csr_wdata;
          R_UMAIN_CFG: umain_en <= csr_wdata[0];
          R_UMAIN_LO:  umain_lo <= csr_wdata;
          R_UMAIN_HI:  umain_hi <= csr_wdata;
          R_MAINCALL:  maincall <= csr_wdata;
          R_RETPC:     retpc    <= csr_wdata;
          R_MEM_CFG:
            for (int i = 0; i < NUM_MEM; i++) mem_cfg[i] <= csr_wdata[4*i +: 3];
          R_JUMP_CFG:
            for (int i = 0; i < NUM_JUMP; i++) jump_cfg[i] <= csr_wdata[4*i +: 2];
          R_MEM_BOUND:
            if (hi_sel) mem_hi[idx[MIW-1:0]] <= csr_wdata;
            else        mem_lo[idx[MIW-1:0]] <= csr_wdata;
          R_JUMP_BOUND:
            if (hi_sel) jump_hi[idx[JIW-1:0]] <= csr_wdata;
            else        jump_lo[idx[JIW-1:0]] <= csr_wdata;
          default: ;
        endcase
      end
    end
  end

  // ----------------------------------------------------------------- read
  always_comb begin
    csr_rdata = '0;
    if (csr_hit && allowed) begin
      unique case (sel)
        R_SMAIN_CFG: csr_rdata = XLEN'(smain_en);
        R_SMAIN_LO:  csr_rdata = smain_lo;
        R_SMAIN_HI:  csr_rdata = smain_hi;
        R_UMAIN_CFG: csr_rdata = XLEN'(umain_en);
        R_UMAIN_LO:  csr_rdata = umain_lo;
        R_UMAIN_HI:  csr_rdata = umain_hi;
        R_MAINCALL:  csr_rdata = maincall;
        R_RETPC:     csr_rdata = retpc;
        R_MEM_CFG:
          for (int i = 0; i < NUM_MEM; i++) csr_rdata[4*i +: 3] = mem_cfg[i];
        R_JUMP_CFG:
          for (int i = 0; i < NUM_JUMP; i++) csr_rdata[4*i +: 2] = jump_cfg[i];
        R_MEM_BOUND:  csr_rdata = hi_sel ? mem_hi[idx[MIW-1:0]]  : mem_lo[idx[MIW-1:0]];
        R_JUMP_BOUND: csr_rdata = hi_sel ? jump_hi[idx[JIW-1:0]] : jump_lo[idx[JIW-1:0]];
        default: ;
      endcase
    end
  end

endmodule
