// dasics_mem_checker -- bound check of loads and stores of untrusted code.
//
// Each of NUM_PORTS load/store pipelines presents its access (virtual
// address, size, load or store, and the tag of the instruction) in the same
// cycle it looks up the TLB. An untrusted access passes only if the whole
// access [vaddr, vaddr + 2**size) lies inside one memory bound register
// whose V bit is set and which grants the operation: R for a load, W for a
// store. Otherwise the port's fault bit is raised, a DASICS load or store
// exception. Trusted accesses are never faulted.
// All NUM_MEM bounds are compared in parallel for each port; the check is
// purely combinational. 16 bounds, the V/R/W bits and four ports (two load
// units, two store units) follow the paper; checking the last byte as well
// as the first is this design's choice.
module dasics_mem_checker
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN      = dasics_pkg::DEF_XLEN,
  parameter int unsigned NUM_MEM   = dasics_pkg::DEF_NUM_MEM,
  parameter int unsigned NUM_PORTS = 4
) (
  input  logic [NUM_PORTS-1:0] req_valid,
  input  logic [NUM_PORTS-1:0] req_is_store,
  input  logic [NUM_PORTS-1:0] req_untrusted,
  input  logic [XLEN-1:0]      req_vaddr [NUM_PORTS],
  input  logic [1:0]           req_size  [NUM_PORTS],  // log2 of bytes
  input  logic [XLEN-1:0]      mem_lo    [NUM_MEM],
  input  logic [XLEN-1:0]      mem_hi    [NUM_MEM],
  input  mem_cfg_t             mem_cfg   [NUM_MEM],
  output logic [NUM_PORTS-1:0] fault
);

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      logic ok;
      ok = 1'b0;
      for (int i = 0; i < NUM_MEM; i++) begin
        if (mem_cfg[i].v &&
            (req_is_store[p] ? mem_cfg[i].w : mem_cfg[i].r) &&
            access_in_range(req_vaddr[p], 4'd1 << req_size[p], mem_lo[i], mem_hi[i]))
          ok = 1'b1;
      end
      fault[p] = req_valid[p] && req_untrusted[p] && !ok;
    end
  end

endmodule
