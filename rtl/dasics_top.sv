// dasics_top -- the DASICS protection logic of one RISC-V core.
//
// Wires the DASICS blocks together the way they sit in an out-of-order core:
//   dasics_csr            configuration registers, in the CSR unit; its
//                         outputs are the "CSR update" wires to every checker
//   dasics_tagger         front end: tags each fetched instruction untrusted
//                         when its PC is outside the trusted zone
//   dasics_branch_checker front end: taken branches of untrusted code must
//                         land in an active zone
//   dasics_jump_checker   jump unit: jal/jalr of untrusted code may only go
//                         to the saved return PC, the trusted-call entry or
//                         an active zone; trusted dasicscall.jr saves pc+4
//   dasics_mem_checker    load/store units: NUM_LOAD + NUM_STORE ports
//                         checked against the memory bound registers
//   dasics_trap           delivers committed violations and intercepted
//                         ecalls at the privilege level they occur in
// The rest of the core (fetch unit, decode, reorder buffer, load/store and
// jump units, TLB, caches, supervisor trap CSRs) is outside this module:
// its side of each interface is a port. The core carries each instruction's
// tag from fetch_untrusted along with it and hands it back on br_/jmp_/ld_/
// st_/csr_/ecall_untrusted; a checker fault marks the instruction, and when
// the reorder buffer commits a marked instruction it reports it on exc_*.
// All checks are combinational (same cycle as the request); CSR writes and
// the user trap registers update on the rising clock edge.
// Block split, register counts and port counts follow the paper; XLEN,
// FETCH_WIDTH and the timing are this design's choice.
module dasics_top
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN        = dasics_pkg::DEF_XLEN,
  parameter int unsigned NUM_MEM     = dasics_pkg::DEF_NUM_MEM,
  parameter int unsigned NUM_JUMP    = dasics_pkg::DEF_NUM_JUMP,
  parameter int unsigned FETCH_WIDTH = 16,
  parameter int unsigned NUM_LOAD    = 2,
  parameter int unsigned NUM_STORE   = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  priv_e                  priv,
  // instruction fetch unit: fetch packet and its tags
  input  logic [XLEN-1:0]        fetch_pc        [FETCH_WIDTH],
  output logic [FETCH_WIDTH-1:0] fetch_untrusted,
  // instruction fetch unit: taken branch
  input  logic                   br_valid,
  input  logic                   br_untrusted,
  input  logic [XLEN-1:0]        br_target,
  output logic                   br_fault,
  // jump unit
  input  logic                   jmp_valid,
  input  logic                   jmp_untrusted,
  input  logic                   jmp_is_dasicscall,
  input  logic [XLEN-1:0]        jmp_pc,
  input  logic [XLEN-1:0]        jmp_target,
  output logic                   jmp_fault,
  // load units
  input  logic [NUM_LOAD-1:0]    ld_valid,
  input  logic [NUM_LOAD-1:0]    ld_untrusted,
  input  logic [XLEN-1:0]        ld_vaddr        [NUM_LOAD],
  input  logic [1:0]             ld_size         [NUM_LOAD],
  output logic [NUM_LOAD-1:0]    ld_fault,
  // store units
  input  logic [NUM_STORE-1:0]   st_valid,
  input  logic [NUM_STORE-1:0]   st_untrusted,
  input  logic [XLEN-1:0]        st_vaddr        [NUM_STORE],
  input  logic [1:0]             st_size         [NUM_STORE],
  output logic [NUM_STORE-1:0]   st_fault,
  // CSR unit
  input  logic                   csr_valid,
  input  logic [11:0]            csr_addr,
  input  logic                   csr_we,
  input  logic [XLEN-1:0]        csr_wdata,
  input  logic                   csr_untrusted,
  output logic                   csr_hit,
  output logic                   csr_illegal,
  output logic [XLEN-1:0]        csr_rdata,
  // commit (reorder buffer)
  input  logic                   exc_valid,
  input  viol_e                  exc_kind,
  input  logic [XLEN-1:0]        exc_pc,
  input  logic [XLEN-1:0]        exc_tval,
  input  logic                   ecall_valid,
  input  logic                   ecall_untrusted,
  input  logic [XLEN-1:0]        ecall_pc,
  output logic                   ecall_pass,
  input  logic                   uret_valid,
  // trap delivery
  output logic                   redirect_valid,
  output logic [XLEN-1:0]        redirect_pc,
  output logic                   strap_valid,
  output logic [XLEN-1:0]        strap_cause,
  output logic [XLEN-1:0]        strap_epc,
  output logic [XLEN-1:0]        strap_tval
);

  localparam int unsigned NUM_PORTS = NUM_LOAD + NUM_STORE;

  // ---------------------------------------------------- configuration bus
  logic            smain_en, umain_en;
  logic [XLEN-1:0] smain_lo, smain_hi, umain_lo, umain_hi;
  logic [XLEN-1:0] mem_lo   [NUM_MEM];
  logic [XLEN-1:0] mem_hi   [NUM_MEM];
  mem_cfg_t        mem_cfg  [NUM_MEM];
  logic [XLEN-1:0] jump_lo  [NUM_JUMP];
  logic [XLEN-1:0] jump_hi  [NUM_JUMP];
  jump_cfg_t       jump_cfg [NUM_JUMP];
  logic [XLEN-1:0] maincall, retpc;

  logic            call_valid;
  logic [XLEN-1:0] call_ret_pc;

  logic            dcsr_hit, dcsr_illegal, tcsr_hit, tcsr_illegal;
  logic [XLEN-1:0] dcsr_rdata, tcsr_rdata;

  dasics_csr #(.XLEN(XLEN), .NUM_MEM(NUM_MEM), .NUM_JUMP(NUM_JUMP)) u_csr (
    .clk, .rst_n, .priv,
    .csr_valid, .csr_addr, .csr_we, .csr_wdata, .csr_untrusted,
    .csr_hit(dcsr_hit), .csr_illegal(dcsr_illegal), .csr_rdata(dcsr_rdata),
    .call_valid, .call_ret_pc,
    .smain_en, .smain_lo, .smain_hi, .umain_en, .umain_lo, .umain_hi,
    .mem_lo, .mem_hi, .mem_cfg, .jump_lo, .jump_hi, .jump_cfg,
    .maincall, .retpc
  );

  // ------------------------------------------------------------ front end
  dasics_tagger #(.XLEN(XLEN), .FETCH_WIDTH(FETCH_WIDTH)) u_tagger (
    .priv, .smain_en, .smain_lo, .smain_hi, .umain_en, .umain_lo, .umain_hi,
    .pc(fetch_pc), .untrusted(fetch_untrusted)
  );

  dasics_branch_checker #(.XLEN(XLEN), .NUM_JUMP(NUM_JUMP)) u_branch_checker (
    .br_valid, .br_untrusted, .br_target, .jump_lo, .jump_hi, .jump_cfg, .br_fault
  );

  // ------------------------------------------------------------ jump unit
  dasics_jump_checker #(.XLEN(XLEN), .NUM_JUMP(NUM_JUMP)) u_jump_checker (
    .jmp_valid, .jmp_untrusted, .jmp_is_dasicscall, .jmp_pc, .jmp_target,
    .jump_lo, .jump_hi, .jump_cfg, .maincall, .retpc,
    .jmp_fault, .call_valid, .call_ret_pc
  );

  // -------------------------------------------------------------- memblock
  logic [NUM_PORTS-1:0] m_valid, m_store, m_untrusted, m_fault;
  logic [XLEN-1:0]      m_vaddr [NUM_PORTS];
  logic [1:0]           m_size  [NUM_PORTS];

  always_comb begin
    for (int i = 0; i < NUM_LOAD; i++) begin
      m_valid[i]     = ld_valid[i];
      m_store[i]     = 1'b0;
      m_untrusted[i] = ld_untrusted[i];
      m_vaddr[i]     = ld_vaddr[i];
      m_size[i]      = ld_size[i];
    end
    for (int i = 0; i < NUM_STORE; i++) begin
      m_valid[NUM_LOAD+i]     = st_valid[i];
      m_store[NUM_LOAD+i]     = 1'b1;
      m_untrusted[NUM_LOAD+i] = st_untrusted[i];
      m_vaddr[NUM_LOAD+i]     = st_vaddr[i];
      m_size[NUM_LOAD+i]      = st_size[i];
    end
  end

  dasics_mem_checker #(.XLEN(XLEN), .NUM_MEM(NUM_MEM), .NUM_PORTS(NUM_PORTS)) u_mem_checker (
    .req_valid(m_valid), .req_is_store(m_store), .req_untrusted(m_untrusted),
    .req_vaddr(m_vaddr), .req_size(m_size),
    .mem_lo, .mem_hi, .mem_cfg, .fault(m_fault)
  );

  assign ld_fault = m_fault[NUM_LOAD-1:0];
  assign st_fault = m_fault[NUM_PORTS-1:NUM_LOAD];

  // ------------------------------------------------------------------ trap
  dasics_trap #(.XLEN(XLEN)) u_trap (
    .clk, .rst_n, .priv,
    .csr_valid, .csr_addr, .csr_we, .csr_wdata, .csr_untrusted,
    .csr_hit(tcsr_hit), .csr_illegal(tcsr_illegal), .csr_rdata(tcsr_rdata),
    .exc_valid, .exc_kind, .exc_pc, .exc_tval,
    .ecall_valid, .ecall_untrusted, .ecall_pc, .ecall_pass,
    .uret_valid, .redirect_valid, .redirect_pc,
    .strap_valid, .strap_cause, .strap_epc, .strap_tval
  );

  assign csr_hit     = dcsr_hit || tcsr_hit;
  assign csr_illegal = dcsr_illegal || tcsr_illegal;
  assign csr_rdata   = dcsr_rdata | tcsr_rdata;

  // ------------------------------------------------------------ interface rules
  // only a valid request of untrusted code can fault
  assert property (@(posedge clk) disable iff (!rst_n) br_fault  |-> br_valid  && br_untrusted);
  assert property (@(posedge clk) disable iff (!rst_n) jmp_fault |-> jmp_valid && jmp_untrusted);
  assert property (@(posedge clk) disable iff (!rst_n) (ld_fault & ~(ld_valid & ld_untrusted)) == '0);
  assert property (@(posedge clk) disable iff (!rst_n) (st_fault & ~(st_valid & st_untrusted)) == '0);
  // the DASICS and user trap CSR ranges never overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(dcsr_hit && tcsr_hit));
  // M-mode code is never untrusted
  assert property (@(posedge clk) disable iff (!rst_n) (priv == PRIV_M) |-> fetch_untrusted == '0);

endmodule
