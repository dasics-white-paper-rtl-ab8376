// dasics_tagger -- marks fetched instructions as trusted or untrusted.
//
// DASICS makes the code itself the subject of protection: an instruction is
// trusted when its PC lies in the trusted ("main") zone of the privilege
// level it runs at, and untrusted otherwise. The tagger compares each PC of
// a fetch packet with that zone and sends IsUntrusted along with the packet,
// so every later check (branch, jump, load/store, CSR access, ecall) knows
// which kind of code issued the instruction.
//
// Rules: M-mode code is always trusted; S-mode code is checked against the
// S-mode zone and U-mode code against the U-mode zone, each only while that
// level's protection toggle is on. Zones are half-open [lo, hi).
// Interface: priv and FETCH_WIDTH PCs in, FETCH_WIDTH tag bits out. Purely
// combinational, so the tags leave in the same cycle as the packet. The
// zone compare follows the paper; the packet width of 16 and the
// combinational timing are this design's choice.
module dasics_tagger
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN        = dasics_pkg::DEF_XLEN,
  parameter int unsigned FETCH_WIDTH = 16
) (
  input  priv_e                 priv,
  input  logic                  smain_en,
  input  logic [XLEN-1:0]       smain_lo,
  input  logic [XLEN-1:0]       smain_hi,
  input  logic                  umain_en,
  input  logic [XLEN-1:0]       umain_lo,
  input  logic [XLEN-1:0]       umain_hi,
  input  logic [XLEN-1:0]       pc        [FETCH_WIDTH],
  output logic [FETCH_WIDTH-1:0] untrusted
);

  logic            en;
  logic [XLEN-1:0] lo, hi;

  always_comb begin
    unique case (priv)
      PRIV_S:  begin en = smain_en; lo = smain_lo; hi = smain_hi; end
      PRIV_U:  begin en = umain_en; lo = umain_lo; hi = umain_hi; end
      default: begin en = 1'b0;     lo = '0;       hi = '0;       end
    endcase
  end

  always_comb begin
    for (int i = 0; i < FETCH_WIDTH; i++)
      untrusted[i] = en && !in_range(pc[i], lo, hi);
  end

endmodule
