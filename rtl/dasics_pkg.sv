// dasics_pkg -- types, constants and range-check functions shared by the
// DASICS (Dynamic in-Address-Space Isolation by Code Segments) blocks.
//
// DASICS splits the code of one privilege level into a trusted zone (a
// "main" address range per privilege level) and everything else, which is
// untrusted. Untrusted code may only touch data inside memory bound
// registers (V/R/W) and may only transfer control into active zones (jump
// bound registers, V/X), to the saved return address of the trusted call
// that entered it, or to the trusted-call entry point.
//
// Following the paper: 16 memory bounds, 4 jump bounds, the V/R/W and V/X
// configuration fields, an S-mode and a U-mode trusted zone, the return-PC
// and trusted-call-entry registers.
// This design's own choices: XLEN = 64, the CSR address map, the bit
// positions of the cfg fields, the cause codes 24..31 and half-open
// [lo, hi) bounds.
package dasics_pkg;

  parameter int unsigned DEF_XLEN        = 64;
  parameter int unsigned DEF_NUM_MEM     = 16;
  parameter int unsigned DEF_NUM_JUMP    = 4;

  // RISC-V privilege encoding
  typedef enum logic [1:0] {
    PRIV_U = 2'b00,
    PRIV_S = 2'b01,
    PRIV_M = 2'b11
  } priv_e;

  // Memory bound configuration, one nibble per bound: {0, W, R, V}
  typedef struct packed {
    logic w;
    logic r;
    logic v;
  } mem_cfg_t;

  // Jump (active zone) bound configuration, one nibble per bound: {0, 0, X, V}
  typedef struct packed {
    logic x;
    logic v;
  } jump_cfg_t;

  // Kind of a committed DASICS violation
  typedef enum logic [1:0] {
    VIOL_JUMP  = 2'd0,
    VIOL_LOAD  = 2'd1,
    VIOL_STORE = 2'd2,
    VIOL_ECALL = 2'd3
  } viol_e;

  // Exception cause codes (custom range). U-level = even, S-level = odd.
  localparam logic [5:0] CAUSE_U_JUMP  = 6'd24;
  localparam logic [5:0] CAUSE_S_JUMP  = 6'd25;
  localparam logic [5:0] CAUSE_U_LOAD  = 6'd26;
  localparam logic [5:0] CAUSE_S_LOAD  = 6'd27;
  localparam logic [5:0] CAUSE_U_STORE = 6'd28;
  localparam logic [5:0] CAUSE_S_STORE = 6'd29;
  localparam logic [5:0] CAUSE_U_ECALL = 6'd30;
  localparam logic [5:0] CAUSE_S_ECALL = 6'd31;

  // DASICS CSR address map
  localparam logic [11:0] CSR_SMAIN_CFG = 12'h9E0;  // bit0: S-mode protection on
  localparam logic [11:0] CSR_SMAIN_LO  = 12'h9E2;
  localparam logic [11:0] CSR_SMAIN_HI  = 12'h9E3;
  localparam logic [11:0] CSR_UMAIN_CFG = 12'h5E0;  // bit0: U-mode protection on
  localparam logic [11:0] CSR_UMAIN_LO  = 12'h5E2;
  localparam logic [11:0] CSR_UMAIN_HI  = 12'h5E3;
  localparam logic [11:0] CSR_MEM_CFG   = 12'h880;  // nibble i = mem bound i
  localparam logic [11:0] CSR_MEM_BASE  = 12'h890;  // 0x890+2i = lo, 0x891+2i = hi
  localparam logic [11:0] CSR_MAINCALL  = 12'h8B0;  // trusted-call entry
  localparam logic [11:0] CSR_RETPC     = 12'h8B1;  // return PC of dasicscall.jr
  localparam logic [11:0] CSR_JUMP_BASE = 12'h8C0;  // 0x8C0+2i = lo, 0x8C1+2i = hi
  localparam logic [11:0] CSR_JUMP_CFG  = 12'h8C8;  // nibble i = jump bound i

  // N-extension user trap CSRs
  localparam logic [11:0] CSR_UTVEC    = 12'h005;
  localparam logic [11:0] CSR_USCRATCH = 12'h040;
  localparam logic [11:0] CSR_UEPC     = 12'h041;
  localparam logic [11:0] CSR_UCAUSE   = 12'h042;
  localparam logic [11:0] CSR_UTVAL    = 12'h043;

  // addr lies in [lo, hi)
  function automatic logic in_range(input logic [DEF_XLEN-1:0] addr,
                                    input logic [DEF_XLEN-1:0] lo,
                                    input logic [DEF_XLEN-1:0] hi);
    return (addr >= lo) && (addr < hi);
  endfunction

  // the access [addr, addr + bytes) lies in [lo, hi); the end is computed one
  // bit wider so an access at the top of the address space cannot wrap
  function automatic logic access_in_range(input logic [DEF_XLEN-1:0] addr,
                                           input logic [3:0]      bytes,
                                           input logic [DEF_XLEN-1:0] lo,
                                           input logic [DEF_XLEN-1:0] hi);
    logic [DEF_XLEN:0] last;
    last = {1'b0, addr} + {{(DEF_XLEN-3){1'b0}}, bytes};
    return (addr >= lo) && (last <= {1'b0, hi});
  endfunction

endpackage
