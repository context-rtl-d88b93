// tb_contxt_top: end-to-end test of the taint unit at its default sizes
// (64-entry TLB, 1024-set 8-way cache taint arrays).
//
// The testbench plays the core and the page walker. The walker answers a
// request after WALK_LAT cycles with a 4-level walk; the page holding the
// secret array carries the non-transient flag in its leaf entry, the stack
// page in an upper-level entry, and one page is not present.
// The scenario is the Spectre bounds-check example:
//   cmp / jbe resolved late, so the body runs transiently:
//     mov (rax+rdi),al   secret load: gets the dummy value 0, rax tainted
//     shl 12,rax         depends on rax: suppressed, operand dummy
//     and 0xff000,eax    suppressed
//     mov (rdx+rax),al   the leaking access: suppressed
//   misprediction: squash, speculative taint is dropped.
// followed by architectural use of the secret, register spills to the
// non-transient stack and their reload (cache taint bit wins over the page
// bit), eviction of the spilled line (taint falls back to the page), a
// stores that write their taint only when they commit (a squashed one
// leaves no trace, a transiently issued one that commits does, a load waits
// a cycle while a store commits), a store of a tainted register to normal
// memory (untaint), an interrupt with
// the save/restore sequence of IA32_TAINT, the feature disabled through the
// control register, a page fault and a TLB invalidation.
// Every mechanism is counted and must occur at least once.
module tb_contxt_top;
  import contxt_pkg::*;

  localparam int WALK_LAT = 3;
  localparam logic [47:0] SECRET_VA = 48'h0000_005E_C040;  // non-transient data page
  localparam logic [47:0] ARRAY_VA  = 48'h0000_0010_0000;  // public array
  localparam logic [47:0] PROBE_VA  = 48'h0000_0020_0000;  // probe array
  localparam logic [47:0] STACK_VA  = 48'h0000_7FFF_F000;  // non-transient stack page
  localparam logic [47:0] OUT_VA    = 48'h0000_0030_0000;  // normal output buffer
  localparam logic [47:0] HOLE_VA   = 48'h0000_0666_0000;  // not mapped
  localparam logic [63:0] SECRET    = 64'h0000_0000_0000_0053;

  logic clk = 0, rst_n = 0;
  logic cr_nt_enable;
  logic [63:0] pat = 64'h0007_0406_0007_0406;   // power-on IA32_PAT value
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
  logic tlb_inval_valid, tlb_flush_all, llc_flush_valid, llc_evict;
  vpn_t tlb_inval_vpn;
  logic [PA_BITS-1:0] llc_flush_paddr;
  logic msr_wr, msr_hit, intr_take, iret;
  logic [31:0] msr_addr;
  logic [63:0] msr_wdata, msr_rdata;
  taint_vec_t arch_taint, spec_taint, shadow_taint;

  contxt_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_walk = 0, n_dummy = 0, n_suppress = 0, n_squash = 0, n_spill_clean = 0,
      n_evict_fallback = 0, n_store_untaint = 0, n_intr = 0, n_iret_restore = 0,
      n_disabled_pass = 0, n_fault = 0, n_tlb_inval = 0, n_rep = 0, n_imm_untaint = 0,
      n_late_store = 0, n_port_stall = 0;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  // ------------------------------------------------------------ page walker
  function automatic logic [33:0] ppn_of(vpn_t v);
    return 34'(v) ^ 34'h1_0000;     // any injective mapping
  endfunction

  function automatic pte_t entry(logic [33:0] pn, logic p, logic ntb);
    pte_t e;
    e = '0;
    e[PTE_P] = p; e[PTE_RW] = 1; e[PTE_US] = 1;
    e[PTE_PPN_HI:PTE_PPN_LO] = pn;
    e[PTE_NT_BIT] = ntb;
    return e;
  endfunction

  int   wk_cnt;
  logic wk_busy;
  vpn_t wk_vpn;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wk_busy <= 0; wk_cnt <= 0; walk_resp_valid <= 0; wk_vpn <= '0;
    end else begin
      walk_resp_valid <= 0;
      if (!wk_busy && walk_req && !walk_resp_valid) begin
        wk_busy <= 1; wk_cnt <= WALK_LAT; wk_vpn <= walk_vpn;
        n_walk++;
      end else if (wk_busy) begin
        if (wk_cnt == 1) begin
          wk_busy <= 0;
          walk_resp_valid <= 1;
          walk_resp_vpn   <= wk_vpn;
          walk_resp_levels <= 4'b1111;
          walk_resp_ept_nt <= 0;
          // root .. leaf; the stack page gets its NT flag from the PD level
          walk_resp_pte[3] <= entry(34'h100, 1, 0);
          walk_resp_pte[2] <= entry(34'h101, 1, 0);
          walk_resp_pte[1] <= entry(34'h102, 1, wk_vpn == vpn_t'(STACK_VA >> 12));
          walk_resp_pte[0] <= entry(ppn_of(wk_vpn), wk_vpn != vpn_t'(HOLE_VA >> 12),
                                    wk_vpn == vpn_t'(SECRET_VA >> 12));
        end
        wk_cnt <= wk_cnt - 1;
      end
    end
  end

  always @(posedge clk) if (rst_n && page_fault) n_fault++;

  // ------------------------------------------------------------ core side
  typedef struct {
    logic [NUM_SRC-1:0][63:0] src;
    logic [63:0]              mem;
    logic                     suppress, mem_masked, mem_taint, dst_taint;
    logic [NUM_SRC-1:0]       src_masked;
    logic [PA_BITS-1:0]       paddr;
    logic                     hit;
    int                       cycles;
  } res_t;

  function automatic uop_t mk(op_kind_e k, int d, int s0 = -1, int s1 = -1,
                              logic [47:0] va = '0, logic tr = 0);
    uop_t u;
    u = '0;
    u.kind = k; u.transient = tr; u.vaddr = va;
    u.dst_valid = d >= 0; u.dst = reg_idx_t'(d < 0 ? 0 : d);
    u.src_valid = {1'b0, s1 >= 0, s0 >= 0};
    u.src[0] = reg_idx_t'(s0 < 0 ? 0 : s0);
    u.src[1] = reg_idx_t'(s1 < 0 ? 0 : s1);
    return u;
  endfunction

  task automatic issue(input uop_t u, input logic [63:0] s0, input logic [63:0] s1,
                       input logic [63:0] mem, output res_t r);
    int c;
    c = 0;
    iss_valid = 1; iss_uop = u;
    iss_src_data = '0; iss_src_data[0] = s0; iss_src_data[1] = s1; iss_mem_data = mem;
    #1;
    while (!iss_ready) begin
      @(posedge clk); #1; c++;
      if (c > 200) break;
    end
    r.src = out_src_data; r.mem = out_mem_data; r.suppress = out_suppress;
    r.mem_masked = out_mem_masked; r.mem_taint = out_mem_taint; r.dst_taint = out_dst_taint;
    r.src_masked = out_src_masked; r.paddr = out_paddr; r.hit = out_llc_hit; r.cycles = c;
    if (r.mem_masked) n_dummy++;
    if (r.suppress) n_suppress++;
    @(posedge clk); #1;
    iss_valid = 0;
  endtask

  task automatic commit(uop_t u, logic mt, logic [PA_BITS-1:0] pa);
    cmt_valid = 1; cmt_uop = u; cmt_mem_taint = mt; cmt_paddr = pa;
    @(posedge clk); #1;
    cmt_valid = 0;
  endtask

  // issue and commit an architectural micro-op
  task automatic arch_op(input uop_t u, input logic [63:0] s0, input logic [63:0] s1,
                         input logic [63:0] mem, output res_t r);
    issue(u, s0, s1, mem, r);
    commit(u, r.mem_taint, r.paddr);
  endtask

  task automatic pulse_squash();
    squash = 1; @(posedge clk); #1; squash = 0; n_squash++;
  endtask

  localparam int RAX = 0, RCX = 1, RDX = 2, RBX = 3, RSP = 4, RDI = 7, R8 = 8;

  initial begin
    res_t r;
    uop_t u;
    int cnt;
    taint_vec_t saved;
    logic held;
    cr_nt_enable = 1;
    iss_valid = 0; iss_uop = '0; iss_src_data = '0; iss_mem_data = '0;
    cmt_valid = 0; cmt_uop = '0; cmt_mem_taint = 0; squash = 0; cmt_paddr = '0;
    tlb_inval_valid = 0; tlb_inval_vpn = '0; tlb_flush_all = 0;
    llc_flush_valid = 0; llc_flush_paddr = '0;
    msr_wr = 0; msr_addr = '0; msr_wdata = '0; intr_take = 0; iret = 0;
    walk_resp_pte = '0; walk_resp_levels = '0; walk_resp_vpn = '0; walk_resp_ept_nt = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // the cache taint arrays clear one set per cycle
    iss_uop = mk(OP_LOAD, RAX, RDI, -1, ARRAY_VA); #1;
    cnt = 0;
    while (!dut.u_llc.ready) begin @(posedge clk); #1; cnt++; end
    check("cache clear takes LLC_SETS cycles", 64'(cnt), 64'(1024));

    // ------------------------------------------- Spectre v1, transient body
    arch_op(mk(OP_NONE, -1, RDI), 64'd100, 0, 0, r);                  // cmp rdi, len
    arch_op(mk(OP_NONE, -1), 0, 0, 0, r);                             // jbe (predicted)
    // transient: mov (rax+rdi), al  -- reads the secret page
    issue(mk(OP_LOAD, RAX, RAX, RDI, SECRET_VA, 1), SECRET_VA - 100, 100, SECRET, r);
    check("TLB miss costs walk + fill", 64'(r.cycles), 64'(WALK_LAT + 2));
    check("secret load masked", 64'(r.mem_masked), 1);
    check("secret load gets dummy", r.mem, 0);
    check("secret load not suppressed", 64'(r.suppress), 0);
    check("rax tainted speculatively", 64'(spec_taint[RAX]), 1);
    check("rax not tainted architecturally", 64'(arch_taint[RAX]), 0);
    issue(mk(OP_ALU, RAX, RAX, -1, '0, 1), 64'h53, 0, 0, r);           // shl 12, rax
    check("shl suppressed", 64'(r.suppress), 1);
    check("shl operand dummy", r.src[0], 0);
    issue(mk(OP_ALU, RAX, RAX, -1, '0, 1), 64'h53000, 0, 0, r);        // and 0xff000, eax
    check("and suppressed", 64'(r.suppress), 1);
    issue(mk(OP_LOAD, RAX, RDX, RAX, PROBE_VA, 1), PROBE_VA, 64'h53000, 0, r); // mov (rdx+rax), al
    check("leaking access suppressed", 64'(r.suppress), 1);
    check("probe address operand dummy", r.src[1], 0);
    check("probe base operand real", r.src[0], 64'(PROBE_VA));
    pulse_squash();
    check("squash drops speculative taint", 64'(spec_taint[RAX]), 0);

    // ------------------------------------------- architectural use of the secret
    arch_op(mk(OP_LOAD, RAX, RAX, -1, SECRET_VA), SECRET_VA, 0, SECRET, r);
    check("architectural load real value", r.mem, SECRET);
    check("architectural load tainted", 64'(arch_taint[RAX]), 1);
    arch_op(mk(OP_ALU, RBX, RAX), SECRET, 0, 0, r);                    // mov rax, rbx
    check("taint propagates", 64'(arch_taint[RBX]), 1);
    // transient use of a tainted register (no memory involved)
    issue(mk(OP_ALU, RCX, RBX, -1, '0, 1), SECRET, 0, 0, r);
    check("tainted register transient use suppressed", 64'(r.suppress), 1);
    pulse_squash();

    // spill rbx (tainted) and r8 (untainted) to the non-transient stack
    arch_op(mk(OP_IMM, R8), 0, 0, 0, r);
    arch_op(mk(OP_STORE, -1, RBX, RSP, STACK_VA + 8), SECRET, STACK_VA, 0, r);
    check("stack page is NT through an upper level", 64'(r.mem_taint), 1);
    check("spill to NT stack keeps taint", 64'(arch_taint[RBX]), 1);
    arch_op(mk(OP_STORE, -1, R8, RSP, STACK_VA + 16), 64'h1234, STACK_VA, 0, r);
    // transient reloads
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 16, 1), STACK_VA, 0, 64'h1234, r);
    check("reload of untainted spill usable", r.mem, 64'h1234);
    check("reload of untainted spill untainted", 64'(r.mem_taint), 0);
    if (!r.mem_taint && r.hit) n_spill_clean++;
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 8, 1), STACK_VA, 0, SECRET, r);
    check("reload of tainted spill masked", r.mem, 0);
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 24, 1), STACK_VA, 0, 64'h77, r);
    check("unwritten stack word keeps page taint", 64'(r.mem_taint), 1);
    pulse_squash();

    // evict the stack line: 8 more lines of the same set (64 KiB apart,
    // physical pages chosen by the walker as ppn = vpn ^ 0x10000)
    for (int k = 1; k <= 8; k++) begin
      logic [47:0] va;
      va = STACK_VA + 16 - 48'(k) * 48'h1_0000;
      arch_op(mk(OP_LOAD, R8, -1, -1, va), 0, 0, 0, r);
    end
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 16, 1), STACK_VA, 0, 64'h1234, r);
    check("evicted spill falls back to page taint", 64'(r.mem_taint), 1);
    check("evicted spill masked", r.mem, 0);
    if (r.mem_taint && !r.hit) n_evict_fallback++;
    pulse_squash();

    // ------------------------------------------- stores drain at commit
    // rbx is still tainted. A clean word of the stack line first:
    arch_op(mk(OP_STORE, -1, R8, RSP, STACK_VA + 32), 0, STACK_VA, 0, r);
    // a transient store of rbx that is squashed writes nothing
    issue(mk(OP_STORE, -1, RBX, RSP, STACK_VA + 32, 1), SECRET, STACK_VA, 0, r);
    pulse_squash();
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 32, 1), STACK_VA, 0, 64'h5, r);
    check("squashed store leaves word clean", 64'(r.mem_taint), 0);
    pulse_squash();
    // the same store issued transiently but committed records the taint
    issue(mk(OP_STORE, -1, RBX, RSP, STACK_VA + 32, 1), SECRET, STACK_VA, 0, r);
    commit(mk(OP_STORE, -1, RBX, RSP, STACK_VA + 32, 1), r.mem_taint, r.paddr);
    issue(mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 32, 1), STACK_VA, 0, SECRET, r);
    check("committed transient store taints word", 64'(r.mem_taint), 1);
    check("committed transient store: reload masked", r.mem, 0);
    if (r.mem_taint) n_late_store++;
    pulse_squash();
    // a load waits while a store commits, then sees the store's taint
    issue(mk(OP_STORE, -1, R8, RSP, STACK_VA + 40), 0, STACK_VA, 0, r);
    cmt_valid = 1; cmt_uop = mk(OP_STORE, -1, R8, RSP, STACK_VA + 40);
    cmt_mem_taint = r.mem_taint; cmt_paddr = r.paddr;
    iss_valid = 1; iss_uop = mk(OP_LOAD, RCX, RSP, -1, STACK_VA + 40, 1);
    iss_mem_data = 64'h6; #1;
    check("load held while a store commits", 64'(iss_ready), 0);
    held = !iss_ready;
    @(posedge clk); #1;
    cmt_valid = 0; #1;
    check("load proceeds next cycle", 64'(iss_ready), 1);
    check("load sees committed store", 64'(out_mem_taint), 0);
    if (held && iss_ready) n_port_stall++;
    @(posedge clk); #1;
    iss_valid = 0;
    pulse_squash();

    // ciphertext written to normal memory: untaints the register
    arch_op(mk(OP_STORE, -1, RBX, -1, OUT_VA), SECRET, 0, 0, r);
    check("store to normal page untaints", 64'(arch_taint[RBX]), 0);
    if (!arch_taint[RBX]) n_store_untaint++;

    // ------------------------------------------- interrupt and context switch
    // rax tainted, rcx tainted via rep-prefixed op
    arch_op(mk(OP_LOAD, RCX, -1, -1, SECRET_VA), 0, 0, SECRET, r);
    saved = arch_taint;
    @(posedge clk); #1;
    intr_take = 1; @(posedge clk); #1; intr_take = 0; n_intr++;
    check("shadow captures taint", 64'(shadow_taint), 64'(saved));
    // handler: rep xor rcx,rcx keeps rcx tainted; plain mov imm untaints rdx
    arch_op(mk(OP_REP_ALU, RCX, RCX, RCX), 0, 0, 0, r);
    check("rep xor keeps taint", 64'(arch_taint[RCX]), 1);
    if (arch_taint[RCX]) n_rep++;
    arch_op(mk(OP_IMM, RAX), 0, 0, 0, r);
    check("immediate untaints", 64'(arch_taint[RAX]), 0);
    if (!arch_taint[RAX]) n_imm_untaint++;
    msr_addr = MSR_IA32_SHADOW_TAINT; #1;
    check("rdmsr shadow", msr_rdata, 64'(saved));
    check("msr hit", 64'(msr_hit), 1);
    // switch back: wrmsr IA32_TAINT with the saved value, then iret
    msr_wr = 1; msr_addr = MSR_IA32_TAINT; msr_wdata = 64'(saved);
    @(posedge clk); #1; msr_wr = 0;
    check("wrmsr sets taint", 64'(arch_taint), 64'(saved));
    arch_op(mk(OP_IMM, RAX), 0, 0, 0, r);       // pop rax etc. clobbers taint
    iret = 1; @(posedge clk); #1; iret = 0;
    check("iret restores taint", 64'(arch_taint), 64'(saved));
    check("iret restores speculative copy", 64'(spec_taint), 64'(saved));
    if (arch_taint == saved) n_iret_restore++;

    // ------------------------------------------- feature disabled
    cr_nt_enable = 0;
    tlb_inval_valid = 1; tlb_inval_vpn = vpn_t'(SECRET_VA >> 12);
    @(posedge clk); #1; tlb_inval_valid = 0; n_tlb_inval++;
    issue(mk(OP_LOAD, RDX, -1, -1, SECRET_VA + 64, 1), 0, 0, SECRET, r);
    check("invalidated page walked again", 64'(r.cycles), 64'(WALK_LAT + 2));
    check("disabled: NT flag ignored", 64'(r.mem_taint), 0);
    check("disabled: real value", r.mem, SECRET);
    issue(mk(OP_ALU, RDX, RCX, -1, '0, 1), 64'h99, 0, 0, r);
    check("disabled: tainted register not gated", 64'(r.suppress), 0);
    check("disabled: taint still tracked", 64'(r.dst_taint), 1);
    if (!r.suppress && r.dst_taint) n_disabled_pass++;
    pulse_squash();
    cr_nt_enable = 1;

    // ------------------------------------------- unmapped page
    fork
      begin
        iss_valid = 1; iss_uop = mk(OP_LOAD, RDX, -1, -1, HOLE_VA);
        repeat (WALK_LAT + 4) @(posedge clk);
        #1;
        check("faulting load never accepted", 64'(iss_ready), 0);
        iss_valid = 0;
      end
    join
    repeat (WALK_LAT + 2) @(posedge clk);
    #1;

    // ------------------------------------------- mechanisms seen
    check("walks", 64'(n_walk > 0), 1);
    check("dummy values", 64'(n_dummy > 0), 1);
    check("suppressions", 64'(n_suppress > 0), 1);
    check("squashes", 64'(n_squash > 0), 1);
    check("clean spill reloads", 64'(n_spill_clean > 0), 1);
    check("eviction fall-backs", 64'(n_evict_fallback > 0), 1);
    check("store untaints", 64'(n_store_untaint > 0), 1);
    check("interrupts", 64'(n_intr > 0), 1);
    check("iret restores", 64'(n_iret_restore > 0), 1);
    check("rep keeps", 64'(n_rep > 0), 1);
    check("immediate untaints", 64'(n_imm_untaint > 0), 1);
    check("disabled mode", 64'(n_disabled_pass > 0), 1);
    check("page faults", 64'(n_fault > 0), 1);
    check("tlb invalidations", 64'(n_tlb_inval > 0), 1);
    check("stores recorded at commit", 64'(n_late_store > 0), 1);
    check("cache port conflicts", 64'(n_port_stall > 0), 1);
    $display("mechanisms: walks=%0d dummy=%0d suppress=%0d squash=%0d clean_spill=%0d evict_fallback=%0d store_untaint=%0d intr=%0d iret=%0d rep=%0d imm=%0d disabled=%0d fault=%0d inval=%0d late_store=%0d port_stall=%0d",
             n_walk, n_dummy, n_suppress, n_squash, n_spill_clean, n_evict_fallback, n_store_untaint,
             n_intr, n_iret_restore, n_rep, n_imm_untaint, n_disabled_pass, n_fault, n_tlb_inval,
             n_late_store, n_port_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
