// tb_pte_nt_decode: checks the NT decode of a 4-level walk in all three
// encodings, with one decoder instance per encoding fed the same walk.
// Directed cases follow the x86-64 entry layout (present bit 0, page number
// 12..45, ignored NT flag in bit 58, reserved NT flag in bit 51, PAT index
// from bits 7, 4 and 3): flag in the leaf, in an upper level only, in an
// unused level, from the nested walk, with the control-register enable
// clear, and a PAT entry switched to the non-transient memory type.
// Random walks and PAT values are then compared with an independent
// reference of each encoding.
module tb_pte_nt_decode;
  import contxt_pkg::*;

  pte_t [3:0]  pte;
  logic [3:0]  level_used;
  logic        ept_nt, cr_nt_enable;
  logic [63:0] pat;
  logic        nt, present, nt_rsv, present_rsv, nt_pat, present_pat;
  ppn_t        ppn, ppn_rsv, ppn_pat;
  int checks = 0, failures = 0;

  pte_nt_decode dut (.*);
  pte_nt_decode #(.NT_MODE(NT_MODE_RESERVED)) dut_rsv (
    .pte, .level_used, .ept_nt, .cr_nt_enable, .pat,
    .nt(nt_rsv), .present(present_rsv), .ppn(ppn_rsv));
  pte_nt_decode #(.NT_MODE(NT_MODE_PAT)) dut_pat (
    .pte, .level_used, .ept_nt, .cr_nt_enable, .pat,
    .nt(nt_pat), .present(present_pat), .ppn(ppn_pat));

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic pte_t mk(logic p, logic ntb, logic [33:0] pn);
    pte_t e;
    e = '0;
    e[0] = p;
    e[1] = 1'b1;           // RW, irrelevant
    e[45:12] = pn;
    e[58] = ntb;
    e[63] = 1'b1;          // XD, irrelevant
    return e;
  endfunction

  // power-on PAT: WB, WT, UC-, UC, WB, WT, UC-, UC
  localparam logic [63:0] PAT_RESET = 64'h0007_0406_0007_0406;

  initial begin
    pat = PAT_RESET;
    level_used = 4'b1111; ept_nt = 0; cr_nt_enable = 1;
    pte = {mk(1,0,34'h1), mk(1,0,34'h2), mk(1,0,34'h3), mk(1,1,34'h2_ABCD)};
    #1 check("leaf nt", 64'(nt), 1); check("ppn", 64'(ppn), 64'h2_ABCD); check("present", 64'(present), 1);
    check("ignored bit is not the reserved flag", 64'(nt_rsv), 0);
    check("no PAT entry is NT", 64'(nt_pat), 0);
    pte[0][58] = 0; pte[2][58] = 1;
    #1 check("upper-level nt", 64'(nt), 1);
    level_used = 4'b0011;  // walk ended early: the flag is only in an unused level
    #1 check("unused level ignored", 64'(nt), 0);
    ept_nt = 1;
    #1 check("ept nt", 64'(nt), 1);
    check("ept nt, reserved encoding", 64'(nt_rsv), 1);
    check("ept nt, PAT encoding", 64'(nt_pat), 1);
    cr_nt_enable = 0;
    #1 check("disabled", 64'(nt), 0);
    check("reserved encoding needs no enable", 64'(nt_rsv), 1);
    cr_nt_enable = 1; ept_nt = 0; level_used = 4'b1111; pte[2][58] = 0;
    pte[1][0] = 0;
    #1 check("not present", 64'(present), 0); check("normal", 64'(nt), 0);
    // bit 51 (reserved) and 52 (another ignored bit) are not the ignored NT flag
    pte[1][0] = 1; pte[0][51] = 1; pte[0][52] = 1;
    #1 check("other bits", 64'(nt), 0);
    check("reserved flag in the leaf", 64'(nt_rsv), 1);
    check("reserved flag keeps the page number", 64'(ppn_rsv), 64'h2_ABCD);
    pte[0][51] = 0; pte[0][52] = 0; pte[3][51] = 1;
    #1 check("reserved flag in the root", 64'(nt_rsv), 1);
    pte[3][51] = 0;
    // the OS turns PAT entry 5 (PAT=1, PCD=0, PWT=1) into the NT type
    pat[8*5 +: 8] = 8'(MT_NON_TRANSIENT);
    pte[0][7] = 1; pte[0][4] = 0; pte[0][3] = 1;
    #1 check("PAT entry 5 is NT", 64'(nt_pat), 1);
    check("PAT encoding leaves the ignored bit alone", 64'(nt), 0);
    pte[0][4] = 1;
    #1 check("PAT entry 7 is not NT", 64'(nt_pat), 0);
    pte[0][4] = 0; pte[0][7] = 0;
    #1 check("PAT entry 1 is not NT", 64'(nt_pat), 0);

    for (int n = 0; n < 1000; n++) begin
      logic any_i, any_r, all;
      logic [2:0] idx;
      for (int l = 0; l < 4; l++) pte[l] = {$urandom, $urandom};
      pat = {$urandom, $urandom};
      // often make the selected entry the NT type
      idx = {pte[0][7], pte[0][4], pte[0][3]};
      if ($urandom % 2 == 0) pat[8*idx +: 3] = 3'd2;
      level_used = 4'($urandom) | 4'b0001; ept_nt = 1'($urandom); cr_nt_enable = 1'($urandom);
      any_i = ept_nt; any_r = ept_nt; all = 1;
      for (int l = 0; l < 4; l++) if (level_used[l]) begin
        any_i |= pte[l][58]; any_r |= pte[l][51]; all &= pte[l][0];
      end
      #1;
      check("rand nt", 64'(nt), 64'(cr_nt_enable & any_i));
      check("rand nt reserved", 64'(nt_rsv), 64'(any_r));
      check("rand nt PAT", 64'(nt_pat), 64'(ept_nt | (pat[8*idx +: 3] == 3'd2)));
      check("rand present", 64'(present), 64'(all));
      check("rand present, other encodings", 64'({present_rsv, present_pat}), 64'({all, all}));
      check("rand ppn", 64'(ppn), 64'(pte[0][45:12]));
      check("rand ppn, other encodings", 64'({ppn_rsv, ppn_pat}), 64'({pte[0][45:12], pte[0][45:12]}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
