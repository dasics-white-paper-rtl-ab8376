// dasics_trap -- raises DASICS exceptions at the privilege level where they
// happen.
//
// DASICS does not send a violation of untrusted code to a more privileged
// level: a U-mode violation is handled by a handler in the U-mode trusted
// zone, an S-mode violation by the S-mode trusted zone. This block takes the
// oldest committing violation (reported by the core's reorder buffer as a
// kind: jump, load, store) or a committing ecall of untrusted code (system
// call interception) and turns it into a cause code:
//   U-mode: it writes the N-extension user trap registers itself (uepc,
//           ucause, utval) and redirects fetch to utvec, all in one cycle;
//           uret later redirects fetch back to uepc.
//   S-mode: it asks the host core's supervisor trap logic to take a trap
//           with the cause, epc and tval it supplies (strap_*).
// M-mode code is always trusted, so nothing arrives from M-mode.
// An ecall of trusted code is not intercepted: ecall_pass tells the host to
// handle it as an ordinary system call.
//
// Interface: exc_* / ecall_* / uret_valid are single-cycle commit events;
// redirect_* and strap_* are combinational responses in the same cycle, and
// the user trap registers update at the next rising edge. The user trap
// CSRs use the N-extension addresses, only direct-mode utvec is supported,
// and untrusted code may not read or write them. The per-level delivery and
// the ecall interception follow the paper; the cause codes, the CSR
// addresses and the rule that DASICS traps ignore the user interrupt enable
// are this design's choice.
module dasics_trap
  import dasics_pkg::*;
#(
  parameter int unsigned XLEN = dasics_pkg::DEF_XLEN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  priv_e           priv,
  // user trap CSR access
  input  logic            csr_valid,
  input  logic [11:0]     csr_addr,
  input  logic            csr_we,
  input  logic [XLEN-1:0] csr_wdata,
  input  logic            csr_untrusted,
  output logic            csr_hit,
  output logic            csr_illegal,
  output logic [XLEN-1:0] csr_rdata,
  // committing DASICS violation
  input  logic            exc_valid,
  input  viol_e           exc_kind,
  input  logic [XLEN-1:0] exc_pc,
  input  logic [XLEN-1:0] exc_tval,
  // committing ecall
  input  logic            ecall_valid,
  input  logic            ecall_untrusted,
  input  logic [XLEN-1:0] ecall_pc,
  output logic            ecall_pass,
  // committing uret
  input  logic            uret_valid,
  // fetch redirect (U-level trap entry or uret)
  output logic            redirect_valid,
  output logic [XLEN-1:0] redirect_pc,
  // S-level trap request to the host
  output logic            strap_valid,
  output logic [XLEN-1:0] strap_cause,
  output logic [XLEN-1:0] strap_epc,
  output logic [XLEN-1:0] strap_tval
);

  logic [XLEN-1:0] utvec, uscratch, uepc, ucause, utval;

  // ------------------------------------------------------------- trap event
  logic            trap;
  viol_e           kind;
  logic [XLEN-1:0] epc, tval;

  always_comb begin
    trap = 1'b0;
    kind = exc_kind;
    epc  = exc_pc;
    tval = exc_tval;
    if (exc_valid) begin
      trap = 1'b1;
    end else if (ecall_valid && ecall_untrusted) begin
      trap = 1'b1;
      kind = VIOL_ECALL;
      epc  = ecall_pc;
      tval = '0;
    end
  end

  assign ecall_pass = ecall_valid && !ecall_untrusted && !exc_valid;

  logic [5:0] ucode, scode;
  always_comb begin
    unique case (kind)
      VIOL_JUMP:  begin ucode = CAUSE_U_JUMP;  scode = CAUSE_S_JUMP;  end
      VIOL_LOAD:  begin ucode = CAUSE_U_LOAD;  scode = CAUSE_S_LOAD;  end
      VIOL_STORE: begin ucode = CAUSE_U_STORE; scode = CAUSE_S_STORE; end
      default:    begin ucode = CAUSE_U_ECALL; scode = CAUSE_S_ECALL; end
    endcase
  end

  logic utrap;
  assign utrap = trap && (priv == PRIV_U);

  assign strap_valid = trap && (priv == PRIV_S);
  assign strap_cause = XLEN'(scode);
  assign strap_epc   = epc;
  assign strap_tval  = tval;

  always_comb begin
    redirect_valid = 1'b0;
    redirect_pc    = '0;
    if (utrap) begin
      redirect_valid = 1'b1;
      redirect_pc    = {utvec[XLEN-1:2], 2'b00};
    end else if (uret_valid) begin
      redirect_valid = 1'b1;
      redirect_pc    = uepc;
    end
  end

  // ------------------------------------------------------------ CSR access
  logic is_u_csr;
  always_comb begin
    unique case (csr_addr)
      CSR_UTVEC, CSR_USCRATCH, CSR_UEPC, CSR_UCAUSE, CSR_UTVAL: is_u_csr = 1'b1;
      default: is_u_csr = 1'b0;
    endcase
  end

  assign csr_hit     = csr_valid && is_u_csr;
  assign csr_illegal = csr_hit && csr_untrusted;

  logic wr;
  assign wr = csr_hit && !csr_untrusted && csr_we;

  always_comb begin
    csr_rdata = '0;
    if (csr_hit && !csr_untrusted) begin
      unique case (csr_addr)
        CSR_UTVEC:    csr_rdata = utvec;
        CSR_USCRATCH: csr_rdata = uscratch;
        CSR_UEPC:     csr_rdata = uepc;
        CSR_UCAUSE:   csr_rdata = ucause;
        CSR_UTVAL:    csr_rdata = utval;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      utvec    <= '0;
      uscratch <= '0;
      uepc     <= '0;
      ucause   <= '0;
      utval    <= '0;
    end else begin
      if (wr) begin
        unique case (csr_addr)
          CSR_UTVEC:    utvec    <= csr_wdata;
          CSR_USCRATCH: uscratch <= csr_wdata;
          CSR_UEPC:     uepc     <= csr_wdata;
          CSR_UCAUSE:   ucause   <= csr_wdata;
          CSR_UTVAL:    utval    <= csr_wdata;
          default: ;
        endcase
      end
      // a trap in the same cycle as a CSR write wins
      if (utrap) begin
        uepc   <= epc;
        ucause <= XLEN'(ucode);
        utval  <= tval;
      end
    end
  end

  // a DASICS trap and a uret cannot commit together
  assert property (@(posedge clk) disable iff (!rst_n) !(trap && uret_valid));

endmodule
