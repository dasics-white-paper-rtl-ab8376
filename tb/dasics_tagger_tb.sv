// dasics_tagger_tb -- self-checking test of the trusted/untrusted tagger.
// Random zones, privilege levels, enables and PCs (many placed on and next
// to the zone edges) are applied; every tag is compared with a reference
// computed here: untrusted = level is U or S, its toggle is on, and the PC
// is outside [lo, hi). Also replays the zone printed in the paper's
// block diagram (0x60000000 .. 0x60010000).
module dasics_tagger_tb;
  import dasics_pkg::*;
  localparam int FW = 16;

  priv_e              priv;
  logic               smain_en, umain_en;
  logic [63:0]        smain_lo, smain_hi, umain_lo, umain_hi;
  logic [63:0]        pc [FW];
  logic [FW-1:0]      untrusted;
  int checks = 0, failures = 0;

  dasics_tagger #(.FETCH_WIDTH(FW)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_tag(priv_e p, logic [63:0] a);
    if (p == PRIV_U) return umain_en && !(a >= umain_lo && a < umain_hi);
    if (p == PRIV_S) return smain_en && !(a >= smain_lo && a < smain_hi);
    return 1'b0;
  endfunction

  task automatic check_all();
    #1;
    for (int i = 0; i < FW; i++) begin
      checks++;
      if (untrusted[i] !== ref_tag(priv, pc[i])) begin
        failures++;
        $display("FAIL priv=%0d pc=%h got %b", priv, pc[i], untrusted[i]);
      end
    end
  endtask

  initial begin
    // the zone of the block diagram, U-mode
    priv = PRIV_U; umain_en = 1; smain_en = 0;
    umain_lo = 64'h6000_0000; umain_hi = 64'h6001_0000;
    smain_lo = 0; smain_hi = 0;
    for (int i = 0; i < FW; i++) pc[i] = 64'h6000_fff0 + 64'(4 * i);  // crosses hi
    check_all();
    for (int i = 0; i < FW; i++) begin
      checks++;
      if (untrusted[i] !== (i >= 4)) begin failures++; $display("FAIL edge %0d", i); end
    end
    pc[0] = 64'h5fff_fffc; pc[1] = 64'h6000_0000;
    #1; checks++;
    if (untrusted[1:0] !== 2'b01) begin failures++; $display("FAIL lo edge"); end
    // M-mode: always trusted
    priv = PRIV_M; check_all();
    checks++; if (untrusted !== '0) failures++;
    // random
    for (int n = 0; n < 3000; n++) begin
      logic [63:0] base;
      base = {32'h0, $urandom};
      smain_lo = {32'h0, $urandom}; smain_hi = smain_lo + 64'($urandom_range(0, 4096));
      umain_lo = {32'h0, $urandom}; umain_hi = umain_lo + 64'($urandom_range(0, 4096));
      smain_en = 1'($urandom); umain_en = 1'($urandom);
      case ($urandom_range(0, 2)) 0: priv = PRIV_U; 1: priv = PRIV_S; default: priv = PRIV_M; endcase
      for (int i = 0; i < FW; i++)
        case ($urandom_range(0, 4))
          0: pc[i] = (priv == PRIV_S) ? smain_lo : umain_lo;
          1: pc[i] = (priv == PRIV_S) ? smain_hi : umain_hi;
          2: pc[i] = ((priv == PRIV_S) ? smain_hi : umain_hi) - 1;
          3: pc[i] = ((priv == PRIV_S) ? smain_lo : umain_lo) + 64'($urandom_range(0, 4096));
          default: pc[i] = base + 64'(4 * i);
        endcase
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
