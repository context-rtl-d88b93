// tb_taint_cache: checks the cache taint bits with 4 sets of 8 ways against
// a reference that keeps, per line, a tag, eight taint bits and the time of
// last use (LRU = oldest time, first free way taken before any eviction).
// Directed part: the clear sequence after reset takes SETS cycles; a spill
// of an untainted register to a non-transient page makes that word read
// back untainted while the other words of the line keep the page's taint;
// after the line is evicted the word reads back tainted again; a store to a
// normal page never leaves taint behind; flush drops the line.
// Random part: 4000 random loads, stores and flushes over 48 lines.
module tb_taint_cache;
  import contxt_pkg::*;
  localparam int S = 4, W = 8;
  localparam int SET_W = 2, TAG_W = PA_BITS - 6 - SET_W;

  logic clk = 0, rst_n = 0;
  logic ready, acc_valid, acc_write, acc_page_nt, acc_st_taint, acc_hit, ld_taint;
  logic flush_valid, evict_valid;
  logic [PA_BITS-1:0] acc_paddr, flush_paddr;
  int checks = 0, failures = 0;

  taint_cache #(.SETS(S), .WAYS(W)) dut (.*);
  always #5 clk = ~clk;

  logic              m_v   [S][W];
  logic [TAG_W-1:0]  m_tag [S][W];
  logic [7:0]        m_tnt [S][W];
  longint            m_time[S][W];
  longint            now;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic logic [PA_BITS-1:0] addr(int line, int word);
    return PA_BITS'(line) << 6 | PA_BITS'(word) << 3;
  endfunction

  // one access, checked and applied to the model
  task automatic access(logic wr, logic [PA_BITS-1:0] a, logic nt, logic st);
    int s, w, hw, vw; logic [TAG_W-1:0] tg; logic h; logic exp_t; longint oldest;
    s = int'(a[6 +: SET_W]); tg = a[PA_BITS-1 -: TAG_W]; w = int'(a[5:3]);
    h = 0; hw = 0;
    for (int i = 0; i < W; i++) if (m_v[s][i] && m_tag[s][i] == tg) begin h = 1; hw = i; end
    exp_t = h ? m_tnt[s][hw][w] : nt;
    acc_valid = 1; acc_write = wr; acc_paddr = a; acc_page_nt = nt; acc_st_taint = st;
    #1;
    check("hit", 64'(acc_hit), 64'(h));
    if (!wr) check("ld_taint", 64'(ld_taint), 64'(exp_t));
    // model update
    if (h) vw = hw;
    else begin
      vw = -1;
      for (int i = W - 1; i >= 0; i--) if (!m_v[s][i]) vw = i;
      check("evict", 64'(evict_valid), 64'(vw < 0));
      if (vw < 0) begin
        oldest = m_time[s][0]; vw = 0;
        for (int i = 1; i < W; i++) if (m_time[s][i] < oldest) begin oldest = m_time[s][i]; vw = i; end
      end
      m_v[s][vw] = 1; m_tag[s][vw] = tg; m_tnt[s][vw] = {8{nt}};
    end
    if (wr) m_tnt[s][vw][w] = nt & st;
    m_time[s][vw] = now++;
    @(posedge clk); #1;
    acc_valid = 0;
  endtask

  task automatic flush(logic [PA_BITS-1:0] a);
    int s; logic [TAG_W-1:0] tg;
    s = int'(a[6 +: SET_W]); tg = a[PA_BITS-1 -: TAG_W];
    flush_valid = 1; flush_paddr = a;
    for (int i = 0; i < W; i++) if (m_tag[s][i] == tg) m_v[s][i] = 0;
    @(posedge clk); #1;
    flush_valid = 0;
  endtask

  task automatic load_expect(string what, logic [PA_BITS-1:0] a, logic nt, logic exp);
    acc_valid = 1; acc_write = 0; acc_paddr = a; acc_page_nt = nt; #1;
    check(what, 64'(ld_taint), 64'(exp));
    acc_valid = 0;
    access(0, a, nt, 0);
  endtask

  initial begin
    int cnt;
    now = 1;
    for (int s = 0; s < S; s++) for (int i = 0; i < W; i++) begin
      m_v[s][i] = 0; m_tag[s][i] = '0; m_tnt[s][i] = '0; m_time[s][i] = 0;
    end
    acc_valid = 0; acc_write = 0; acc_paddr = '0; acc_page_nt = 0; acc_st_taint = 0;
    flush_valid = 0; flush_paddr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cnt = 0;
    while (!ready) begin @(posedge clk); #1; cnt++; end
    check("init cycles", 64'(cnt), 64'(S));

    // spill of an untainted register to the (non-transient) stack
    access(1, addr(5, 3), 1, 0);
    load_expect("spilled word untainted", addr(5, 3), 1, 0);
    load_expect("other word tainted", addr(5, 4), 1, 1);
    access(1, addr(5, 4), 1, 1);
    load_expect("tainted spill", addr(5, 4), 1, 1);
    // evict line 5 (set 1) with 8 other lines of set 1
    for (int k = 1; k <= W; k++) access(0, addr(5 + 4 * k, 0), 0, 0);
    load_expect("evicted word falls back to page NT", addr(5, 3), 1, 1);
    // normal page
    access(1, addr(6, 0), 0, 1);
    load_expect("normal page", addr(6, 0), 0, 0);
    flush(addr(6, 0));
    acc_valid = 1; acc_write = 0; acc_paddr = addr(6, 0); acc_page_nt = 0; #1;
    check("flushed", 64'(acc_hit), 0);
    acc_valid = 0;

    for (int n = 0; n < 4000; n++) begin
      int line;
      line = $urandom % 48;
      if ($urandom % 25 == 0) flush(addr(line, 0));
      else access(1'($urandom), addr(line, $urandom % 8), 1'(line % 3 != 0), 1'($urandom));
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
