// dasics_mem_checker_tb -- self-checking test of the load/store bound check.
// Directed cases reproduce the stack layout of the paper's first case
// study: the library may read and write stack_buffer and its own stack,
// but a read of stack_secret_data and a write of the saved return address
// fault. Accesses that straddle a bound end, permission bits (R for loads,
// W for stores, V) and all 16 bound registers and 4 ports are covered by
// random cases against a reference computed here.
module dasics_mem_checker_tb;
  import dasics_pkg::*;
  localparam int NM = 16;
  localparam int NP = 4;

  logic [NP-1:0] req_valid, req_is_store, req_untrusted, fault;
  logic [63:0]   req_vaddr [NP];
  logic [1:0]    req_size  [NP];
  logic [63:0]   mem_lo [NM];
  logic [63:0]   mem_hi [NM];
  mem_cfg_t      mem_cfg [NM];
  int checks = 0, failures = 0;

  dasics_mem_checker #(.NUM_MEM(NM), .NUM_PORTS(NP)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_fault(int p);
    logic ok = 0;
    logic [64:0] last;
    last = {1'b0, req_vaddr[p]} + 65'(1 << req_size[p]);
    for (int i = 0; i < NM; i++)
      if (mem_cfg[i].v && (req_is_store[p] ? mem_cfg[i].w : mem_cfg[i].r) &&
          req_vaddr[p] >= mem_lo[i] && last <= {1'b0, mem_hi[i]}) ok = 1;
    return req_valid[p] && req_untrusted[p] && !ok;
  endfunction

  // one access on port p, all other ports idle
  task automatic access(int p, logic st, logic [63:0] a, logic [1:0] sz, logic exp, string what);
    req_valid = '0; req_valid[p] = 1; req_is_store[p] = st; req_untrusted[p] = 1;
    req_vaddr[p] = a; req_size[p] = sz;
    #1; checks++;
    if (fault !== (NP'(exp) << p)) begin
      failures++; $display("FAIL %s: port %0d fault=%b", what, p, fault);
    end
  endtask

  initial begin
    for (int i = 0; i < NM; i++) begin mem_lo[i] = 0; mem_hi[i] = 0; mem_cfg[i] = '0; end
    for (int p = 0; p < NP; p++) begin req_vaddr[p] = 0; req_size[p] = 0; end
    req_is_store = '0; req_untrusted = '0;
    // main's frame: reg_save_data 0x3ff0..0x4000, stack_secret_data 0x3f00..0x3ff0,
    // stack_buffer 0x3e00..0x3f00; the library's own stack 0x3000..0x3e00
    mem_lo[0] = 64'h3e00; mem_hi[0] = 64'h3f00; mem_cfg[0] = '{w: 1, r: 1, v: 1};
    mem_lo[1] = 64'h3000; mem_hi[1] = 64'h3e00; mem_cfg[1] = '{w: 1, r: 1, v: 1};
    access(0, 0, 64'h3e80, 3, 0, "read stack_buffer");
    access(2, 1, 64'h3ef8, 3, 0, "write last word of stack_buffer");
    access(1, 0, 64'h3f00, 3, 1, "read stack_secret_data");
    access(3, 1, 64'h3ff8, 3, 1, "write saved return address");
    access(0, 0, 64'h3efc, 3, 1, "read straddling the buffer end");
    access(1, 1, 64'h3100, 2, 0, "write own stack");
    // read-only bound
    mem_cfg[0] = '{w: 0, r: 1, v: 1};
    access(2, 1, 64'h3e80, 0, 1, "write to read-only bound");
    access(0, 0, 64'h3e80, 0, 0, "read of read-only bound");
    mem_cfg[0] = '{w: 1, r: 1, v: 0};
    access(0, 0, 64'h3e80, 0, 1, "invalid bound");
    // trusted access outside every bound
    req_valid = 4'b0001; req_untrusted = '0; req_vaddr[0] = 64'h3ff8;
    #1; checks++; if (fault !== '0) begin failures++; $display("FAIL trusted access"); end
    // bound 15 alone
    for (int i = 0; i < NM; i++) mem_cfg[i] = '0;
    mem_lo[15] = 64'ha000_0100; mem_hi[15] = 64'ha000_f000; mem_cfg[15] = '{w: 1, r: 1, v: 1};
    access(3, 1, 64'ha000_0100, 3, 0, "bound 15");
    access(3, 1, 64'ha000_00ff, 0, 1, "below bound 15");
    // random
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < NM; i++) begin
        mem_lo[i]  = 64'($urandom_range(0, 65535));
        mem_hi[i]  = mem_lo[i] + 64'($urandom_range(0, 4096));
        mem_cfg[i] = 3'($urandom);
      end
      for (int p = 0; p < NP; p++) begin
        req_valid[p] = 1'($urandom); req_is_store[p] = 1'($urandom);
        req_untrusted[p] = ($urandom_range(0, 3) != 0);
        req_size[p] = 2'($urandom);
        case ($urandom_range(0, 3))
          0: req_vaddr[p] = mem_lo[$urandom_range(0, NM-1)];
          1: req_vaddr[p] = mem_hi[$urandom_range(0, NM-1)] - 64'($urandom_range(1, 8));
          default: req_vaddr[p] = 64'($urandom_range(0, 70000));
        endcase
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (fault[p] !== ref_fault(p)) begin
          failures++; $display("FAIL random port %0d addr %h", p, req_vaddr[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
