// tb_contxt_random: random micro-op streams through the whole taint unit at
// its default sizes, compared with a reference of the unit's function.
//
// The reference keeps a speculative and an architectural taint bit per
// register and a taint bit per 64-bit memory word. A word that was never
// stored to architecturally carries its page's NT flag. Six pages are used:
// one non-transient through its leaf entry, two through the page-directory
// entry (a stack), three normal; each page uses four lines, and the pages'
// physical frames put every line in a set of its own, so nothing is evicted
// and the word taint of the reference is exact.
// The stream mixes architectural micro-ops (issued and committed at once)
// with bursts of transient ones that are either committed later in order
// or squashed; stores write the cache taint when they commit, so a store
// from a burst that commits is recorded and one that is squashed is not. Each issue is checked for: memory taint, destination taint,
// which operands are masked, the dummy values and suppress; after every
// step both register-taint copies are compared bit by bit. A second copy of
// the unit uses the PAT encoding of the NT pages (the walker also selects a
// PAT entry holding the non-transient type for them) and must produce the
// same outputs as the first in every cycle.
module tb_contxt_random;
  import contxt_pkg::*;

  localparam int STEPS = 3000;
  localparam logic [47:0] PAGE0 = 48'h0000_0010_0000;   // vpn 0x100 .. 0x105

  logic clk = 0, rst_n = 0;
  logic cr_nt_enable = 1;
  // power-on IA32_PAT with entry 5 switched to the non-transient type
  logic [63:0] pat = 64'h0007_0206_0007_0406;
  logic iss_valid, iss_ready;
  uop_t iss_uop;
  logic [NUM_SRC-1:0][63:0] iss_src_data, out_src_data;
  logic [63:0] iss_mem_data, out_mem_data;
  logic out_suppress, out_mem_masked, out_mem_taint, out_dst_taint, out_llc_hit;
  logic [NUM_SRC-1:0] out_src_masked;
  logic [PA_BITS-1:0] out_paddr;
  logic cmt_valid, cmt_mem_taint, squash;
  logic [PA_BITS-1:0] cmt_paddr;
  uop_t cmt_uop;
  logic walk_req, walk_resp_valid, walk_resp_ept_nt, page_fault;
  vpn_t walk_vpn, walk_resp_vpn;
  pte_t [WALK_LEVELS-1:0] walk_resp_pte;
  logic [WALK_LEVELS-1:0] walk_resp_levels;
  logic tlb_inval_valid = 0, tlb_flush_all = 0, llc_flush_valid = 0, llc_evict;
  vpn_t tlb_inval_vpn = '0;
  logic [PA_BITS-1:0] llc_flush_paddr = '0;
  logic msr_wr = 0, msr_hit, intr_take = 0, iret = 0;
  logic [31:0] msr_addr = '0;
  logic [63:0] msr_wdata = '0, msr_rdata;
  taint_vec_t arch_taint, spec_taint, shadow_taint;
  int walks;

  contxt_top dut (.*);
  walker_model #(.NT_VPN(36'h100), .STACK_VPN_LO(36'h101), .STACK_VPN_HI(36'h102)) u_walk (.*);
  always #5 clk = ~clk;

  // The same unit using the PAT encoding, fed the same stimulus and walks;
  // it must behave identically in every cycle.
  logic                     p_iss_ready, p_out_suppress, p_out_mem_masked, p_out_mem_taint;
  logic                     p_out_dst_taint, p_out_llc_hit, p_walk_req, p_page_fault;
  logic                     p_llc_evict, p_msr_hit;
  logic [NUM_SRC-1:0][63:0] p_out_src_data;
  logic [63:0]              p_out_mem_data, p_msr_rdata;
  logic [NUM_SRC-1:0]       p_out_src_masked;
  logic [PA_BITS-1:0]       p_out_paddr;
  vpn_t                     p_walk_vpn;
  taint_vec_t               p_arch_taint, p_spec_taint, p_shadow_taint;

  contxt_top #(.NT_MODE(NT_MODE_PAT)) dut_pat (
    .clk, .rst_n, .cr_nt_enable, .pat,
    .iss_valid, .iss_ready(p_iss_ready), .iss_uop, .iss_src_data, .iss_mem_data,
    .out_src_data(p_out_src_data), .out_mem_data(p_out_mem_data),
    .out_suppress(p_out_suppress), .out_src_masked(p_out_src_masked),
    .out_mem_masked(p_out_mem_masked), .out_mem_taint(p_out_mem_taint),
    .out_dst_taint(p_out_dst_taint), .out_paddr(p_out_paddr), .out_llc_hit(p_out_llc_hit),
    .cmt_valid, .cmt_uop, .cmt_mem_taint, .cmt_paddr, .squash,
    .walk_req(p_walk_req), .walk_vpn(p_walk_vpn), .walk_resp_valid, .walk_resp_vpn,
    .walk_resp_pte, .walk_resp_levels, .walk_resp_ept_nt, .page_fault(p_page_fault),
    .tlb_inval_valid, .tlb_inval_vpn, .tlb_flush_all, .llc_flush_valid, .llc_flush_paddr,
    .llc_evict(p_llc_evict),
    .msr_wr, .msr_addr, .msr_wdata, .msr_rdata(p_msr_rdata), .msr_hit(p_msr_hit),
    .intr_take, .iret,
    .arch_taint(p_arch_taint), .spec_taint(p_spec_taint), .shadow_taint(p_shadow_taint)
  );

  int n_pat_cmp = 0, n_pat_diff = 0;
  always @(negedge clk) if (rst_n) begin
    n_pat_cmp++;
    if ({p_iss_ready, p_out_suppress, p_out_mem_masked, p_out_mem_taint, p_out_dst_taint,
         p_out_llc_hit, p_walk_req, p_page_fault, p_llc_evict, p_msr_hit, p_out_src_data,
         p_out_mem_data, p_msr_rdata, p_out_src_masked, p_out_paddr, p_walk_vpn,
         p_arch_taint, p_spec_taint, p_shadow_taint}
        !== {iss_ready, out_suppress, out_mem_masked, out_mem_taint, out_dst_taint,
         out_llc_hit, walk_req, page_fault, llc_evict, msr_hit, out_src_data,
         out_mem_data, msr_rdata, out_src_masked, out_paddr, walk_vpn,
         arch_taint, spec_taint, shadow_taint}) begin
      n_pat_diff++;
      if (n_pat_diff < 10) $display("FAIL PAT-encoded unit differs at t=%0t", $time);
    end
  end

  int checks = 0, failures = 0;
  int n_late_store = 0, n_transient = 0, n_squashed = 0, n_late_commit = 0, n_masked = 0, n_suppress = 0;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  // reference state
  bit m_spec [NUM_REGS];
  bit m_arch [NUM_REGS];
  bit m_word [6][32];    // page, line*8+word: architectural word taint

  function automatic bit page_nt(int p);
    return p <= 2;
  endfunction

  function automatic logic [47:0] va_of(int p, int w);
    return PAGE0 + 48'(p) * 48'h1000 + 48'(w / 8) * 48'd64 + 48'(w % 8) * 48'd8;
  endfunction

  typedef struct {
    uop_t u;
    int   page, word;
  } op_t;

  function automatic op_t rand_op(logic tr);
    op_t o; int k;
    o.u = '0;
    o.page = $urandom % 6; o.word = $urandom % 32;
    k = $urandom % 10;
    o.u.kind = k < 3 ? OP_LOAD : k < 5 ? OP_STORE : k < 8 ? OP_ALU : k < 9 ? OP_IMM : OP_REP_ALU;
    o.u.transient = tr;
    o.u.dst_valid = o.u.kind != OP_STORE;
    o.u.dst = reg_idx_t'($urandom % NUM_REGS);
    o.u.src_valid = 3'($urandom) | 3'b001;
    if (o.u.kind == OP_IMM) o.u.src_valid = '0;
    for (int i = 0; i < NUM_SRC; i++) o.u.src[i] = reg_idx_t'($urandom % NUM_REGS);
    o.u.vaddr = va_of(o.page, o.word);
    return o;
  endfunction

  // reference memory taint seen by the micro-op
  function automatic bit ref_mem_taint(op_t o);
    if (o.u.kind == OP_LOAD)  return m_word[o.page][o.word];
    if (o.u.kind == OP_STORE) return page_nt(o.page);
    return 0;
  endfunction

  // reference rule applied to a register-taint copy
  function automatic bit ref_dst(bit t[NUM_REGS], uop_t u, bit mt);
    bit any; any = 0;
    for (int i = 0; i < NUM_SRC; i++) if (u.src_valid[i] && t[u.src[i]]) any = 1;
    case (u.kind)
      OP_ALU:     return any;
      OP_LOAD:    return any | mt;
      OP_IMM:     return 0;
      OP_REP_ALU: return any | t[u.dst];
      default:    return t[u.dst];
    endcase
  endfunction

  task automatic ref_apply(ref bit t[NUM_REGS], input uop_t u, input bit mt);
    bit d;
    if (u.kind == OP_STORE) begin
      if (!mt) t[u.src[0]] = 0;
    end else if (u.dst_valid) begin
      d = ref_dst(t, u, mt);
      t[u.dst] = d;
    end
  endtask

  // issue one micro-op and check everything the unit reports for it
  task automatic do_issue(op_t o, output bit mt, output logic [PA_BITS-1:0] pa);
    logic [NUM_SRC-1:0][63:0] sd; logic [63:0] md; bit sup, mmask, exp_mt;
    for (int i = 0; i < NUM_SRC; i++) sd[i] = {$urandom, $urandom};
    md = {$urandom, $urandom};
    exp_mt = ref_mem_taint(o);
    iss_valid = 1; iss_uop = o.u; iss_src_data = sd; iss_mem_data = md;
    #1;
    while (!iss_ready) begin @(posedge clk); #1; end
    check("mem taint", 64'(out_mem_taint), 64'(exp_mt));
    if (o.u.kind != OP_STORE && o.u.kind != OP_NONE)
      check("dst taint", 64'(out_dst_taint), 64'(ref_dst(m_spec, o.u, exp_mt)));
    sup = 0;
    for (int i = 0; i < NUM_SRC; i++) begin
      bit msk;
      msk = o.u.transient && o.u.src_valid[i] && m_spec[o.u.src[i]];
      sup |= msk;
      check("src masked", 64'(out_src_masked[i]), 64'(msk));
      check("src value", out_src_data[i], msk ? 64'd0 : sd[i]);
    end
    mmask = o.u.transient && o.u.kind == OP_LOAD && exp_mt;
    check("mem masked", 64'(out_mem_masked), 64'(mmask));
    check("mem value", out_mem_data, mmask ? 64'd0 : md);
    check("suppress", 64'(out_suppress), 64'(sup));
    if (sup) n_suppress++;
    if (mmask) n_masked++;
    mt = out_mem_taint; pa = out_paddr;
    @(posedge clk); #1;
    iss_valid = 0;
    ref_apply(m_spec, o.u, exp_mt);
  endtask

  // commit one micro-op; a store writes the architectural taint of its data
  // register (before the store's own update) into the word, masked by the
  // page's NT flag
  task automatic do_commit(op_t o, bit mt, logic [PA_BITS-1:0] pa);
    bit st;
    st = m_arch[o.u.src[0]];
    cmt_valid = 1; cmt_uop = o.u; cmt_mem_taint = mt; cmt_paddr = pa;
    @(posedge clk); #1;
    cmt_valid = 0;
    ref_apply(m_arch, o.u, mt);
    if (o.u.kind == OP_STORE) m_word[o.page][o.word] = page_nt(o.page) & st;
  endtask

  task automatic compare_regs();
    for (int i = 0; i < NUM_REGS; i++) begin
      check("spec reg", 64'(spec_taint[i]), 64'(m_spec[i]));
      check("arch reg", 64'(arch_taint[i]), 64'(m_arch[i]));
    end
  endtask

  initial begin
    op_t q [$];
    bit  qm [$];
    logic [PA_BITS-1:0] qp [$];
    for (int i = 0; i < NUM_REGS; i++) begin m_spec[i] = 0; m_arch[i] = 0; end
    for (int p = 0; p < 6; p++) for (int w = 0; w < 32; w++) m_word[p][w] = page_nt(p);
    iss_valid = 0; iss_uop = '0; iss_src_data = '0; iss_mem_data = '0;
    cmt_valid = 0; cmt_uop = '0; cmt_mem_taint = 0; squash = 0; cmt_paddr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!dut.u_llc.ready) @(posedge clk);
    #1;
    for (int s = 0; s < STEPS; s++) begin
      if ($urandom % 4 != 0) begin
        // architectural micro-op
        op_t o; bit mt; logic [PA_BITS-1:0] pa;
        o = rand_op(0);
        do_issue(o, mt, pa);
        do_commit(o, mt, pa);
      end else begin
        // burst of transient micro-ops
        int n; bit sq;
        n = 1 + $urandom % 6;
        sq = 1'($urandom);
        q.delete(); qm.delete(); qp.delete();
        for (int k = 0; k < n; k++) begin
          op_t o; bit mt; logic [PA_BITS-1:0] pa;
          o = rand_op(1);
          do_issue(o, mt, pa);
          q.push_back(o); qm.push_back(mt); qp.push_back(pa);
          n_transient++;
        end
        if (sq) begin
          squash = 1; @(posedge clk); #1; squash = 0;
          m_spec = m_arch;
          n_squashed++;
        end else begin
          // resolved correctly: the same micro-ops commit in order
          for (int k = 0; k < n; k++) begin
            do_commit(q[k], qm[k], qp[k]);
            if (q[k].u.kind == OP_STORE) n_late_store++;
          end
          n_late_commit++;
        end
      end
      compare_regs();
    end
    check("transient bursts squashed", 64'(n_squashed > 0), 1);
    check("transient bursts committed", 64'(n_late_commit > 0), 1);
    check("transient stores committed later", 64'(n_late_store > 0), 1);
    check("PAT-encoded unit identical in every cycle", 64'(n_pat_diff), 0);
    check("PAT-encoded unit compared", 64'(n_pat_cmp > STEPS), 1);
    check("dummy memory values", 64'(n_masked > 0), 1);
    check("suppressed micro-ops", 64'(n_suppress > 0), 1);
    $display("late stores=%0d transient uops=%0d squashed bursts=%0d committed bursts=%0d masked loads=%0d suppressed=%0d",
             n_late_store, n_transient, n_squashed, n_late_commit, n_masked, n_suppress);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
