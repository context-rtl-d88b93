// tb_nt_tlb: checks the NT-aware TLB with 8 entries against a reference
// model (a list of pages in fill order with round-robin replacement).
// Directed part: a page filled as non-transient looks up with NT set, a
// refill of the same page updates its NT bit in place, invalidation and
// flush remove entries, the ninth distinct page evicts the first.
// Random part: 3000 cycles of random fills, invalidations and lookups over
// 24 pages, every lookup compared with the model.
module tb_nt_tlb;
  import contxt_pkg::*;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  vpn_t lk_vpn, fill_vpn, inval_vpn;
  logic lk_hit, lk_nt, fill_valid, fill_nt, inval_valid, flush_all;
  ppn_t lk_ppn, fill_ppn;
  int checks = 0, failures = 0;

  nt_tlb #(.ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  // reference
  logic       m_v  [N];
  vpn_t       m_vpn[N];
  ppn_t       m_ppn[N];
  logic       m_nt [N];
  int         m_rr;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  task automatic model_step();
    int found;
    if (flush_all) begin
      for (int i = 0; i < N; i++) m_v[i] = 0;
      return;
    end
    if (fill_valid && !(inval_valid && inval_vpn == fill_vpn)) begin
      found = -1;
      for (int i = 0; i < N; i++) if (m_v[i] && m_vpn[i] == fill_vpn) found = i;
      if (found < 0) begin found = m_rr; m_rr = (m_rr + 1) % N; end
      m_v[found] = 1; m_vpn[found] = fill_vpn; m_ppn[found] = fill_ppn; m_nt[found] = fill_nt;
    end
    if (inval_valid)
      for (int i = 0; i < N; i++) if (m_vpn[i] == inval_vpn) m_v[i] = 0;
  endtask

  task automatic check_lookup(vpn_t v);
    logic h, t; ppn_t p;
    lk_vpn = v;
    h = 0; t = 0; p = '0;
    for (int i = 0; i < N; i++) if (m_v[i] && m_vpn[i] == v) begin h = 1; t = m_nt[i]; p = m_ppn[i]; end
    #1;
    check("hit", 64'(lk_hit), 64'(h));
    if (h) begin
      check("ppn", 64'(lk_ppn), 64'(p));
      check("nt", 64'(lk_nt), 64'(t));
    end
  endtask

  task automatic cyc();
    @(posedge clk);
    model_step();
    #1;
    fill_valid = 0; inval_valid = 0; flush_all = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin m_v[i] = 0; m_vpn[i] = '0; m_ppn[i] = '0; m_nt[i] = 0; end
    m_rr = 0;
    fill_valid = 0; inval_valid = 0; flush_all = 0; lk_vpn = '0;
    fill_vpn = '0; fill_ppn = '0; fill_nt = 0; inval_vpn = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    check_lookup(36'h100);
    // fill a non-transient page
    fill_valid = 1; fill_vpn = 36'h100; fill_ppn = 34'h777; fill_nt = 1;
    cyc();
    check_lookup(36'h100);
    check("directed nt", 64'(lk_nt), 1);
    // refill the same page as normal
    fill_valid = 1; fill_vpn = 36'h100; fill_ppn = 34'h778; fill_nt = 0;
    cyc();
    check_lookup(36'h100);
    check("refill nt", 64'(lk_nt), 0);
    // 8 more pages evict page 0x100
    for (int k = 0; k < N; k++) begin
      fill_valid = 1; fill_vpn = 36'h200 + 36'(k); fill_ppn = 34'(k); fill_nt = 1'(k);
      cyc();
    end
    check_lookup(36'h100);
    check("evicted", 64'(lk_hit), 0);
    inval_valid = 1; inval_vpn = 36'h203;
    cyc();
    check_lookup(36'h203);
    check("invalidated", 64'(lk_hit), 0);
    flush_all = 1;
    cyc();
    check_lookup(36'h204);
    check("flushed", 64'(lk_hit), 0);

    for (int n = 0; n < 3000; n++) begin
      fill_valid  = ($urandom % 3) == 0;
      fill_vpn    = 36'($urandom % 24);
      fill_ppn    = 34'($urandom);
      fill_nt     = 1'($urandom);
      inval_valid = ($urandom % 10) == 0;
      inval_vpn   = 36'($urandom % 24);
      flush_all   = ($urandom % 200) == 0;
      check_lookup(36'($urandom % 24));
      cyc();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
