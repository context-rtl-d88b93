// contxt_top: the ConTExT taint unit of one core.
//
// The core hands every micro-op to this unit when it issues and again when
// it commits. At issue the unit
//   * translates the memory operand in the NT-aware TLB (nt_tlb); on a miss
//     it asks the page walker for the entries of the walk, decodes the
//     non-transient bit from them (pte_nt_decode) and fills the TLB,
//   * looks a load's line up in the taint bits of the last-level cache
//     (taint_cache); the load takes the word's taint bit if the line is
//     there and the page's NT bit otherwise,
//   * reads the taint of the register sources (taint_regfile) and, if the
//     micro-op is transient, replaces every tainted operand by the dummy
//     value and flags the micro-op as not to be executed (nt_operand_gate),
//   * updates the speculative register taint with the micro-op's result.
// At commit the same micro-op, with the memory taint and physical address
// reported at issue, updates the architectural taint; a store writes the
// architectural taint of its data register into its word of the cache line
// at commit, as the store buffer drains, so a store that is squashed leaves
// no trace and one that was issued transiently but commits is recorded. A
// squash throws the speculative taint away. The MSR port gives rdmsr/wrmsr
// access to IA32_TAINT and IA32_SHADOW_TAINT (taint_msr); an interrupt
// (intr_take) and iret save and restore the taint through the shadow MSR.
//
// Interface: valid/ready on the issue port; iss_ready is low while the cache
// taint arrays are being cleared after reset, while a memory micro-op
// waits for its translation, and for a load in a cycle in which a store
// commits (the cache taint arrays have one port). All issue outputs (out_*)
// are combinational in the cycle of acceptance; state changes at the next
// clock edge. A TLB miss costs the walker's latency plus one cycle for the
// fill. The page walker,
// the core and the data arrays of the cache and memory are outside this
// unit and connect through the walk_*, iss_*, cmt_* and out_* ports.
// NT_MODE picks how pages are marked non-transient (see pte_nt_decode); pat
// is the core's IA32_PAT value and matters only in NT_MODE_PAT. cr_nt_enable
// switches the whole mechanism: with it clear no operand is gated and, in the
// ignored-bit encoding, no page is NT; with the other encodings the core
// ties it high.
//
// From the paper: which state exists (NT bit in PTE and TLB, one taint bit
// per register, 8 per cache line, the two MSRs), the rules that set and
// clear taint, the dummy value during transient execution, the control
// register enable. Chosen here: the issue/commit protocol, single-cycle
// lookup and the sizes of TLB and cache, which the paper does not give.
module contxt_top
  import contxt_pkg::*;
#(
  parameter nt_mode_e    NT_MODE     = NT_MODE_IGNORED,
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned LLC_SETS    = 1024,
  parameter int unsigned LLC_WAYS    = 8,
  parameter int unsigned DATA_W      = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cr_nt_enable,
  input  logic [63:0]                    pat,
  // issue port
  input  logic                           iss_valid,
  output logic                           iss_ready,
  input  uop_t                           iss_uop,
  input  logic [NUM_SRC-1:0][DATA_W-1:0] iss_src_data,
  input  logic [DATA_W-1:0]              iss_mem_data,
  output logic [NUM_SRC-1:0][DATA_W-1:0] out_src_data,
  output logic [DATA_W-1:0]              out_mem_data,
  output logic                           out_suppress,
  output logic [NUM_SRC-1:0]             out_src_masked,
  output logic                           out_mem_masked,
  output logic                           out_mem_taint,
  output logic                           out_dst_taint,
  output logic [PA_BITS-1:0]             out_paddr,
  output logic                           out_llc_hit,
  // commit port
  input  logic                           cmt_valid,
  input  uop_t                           cmt_uop,
  input  logic                           cmt_mem_taint,
  input  logic [PA_BITS-1:0]             cmt_paddr,
  input  logic                           squash,
  // page walker
  output logic                           walk_req,
  output vpn_t                           walk_vpn,
  input  logic                           walk_resp_valid,
  input  vpn_t                           walk_resp_vpn,
  input  pte_t [WALK_LEVELS-1:0]         walk_resp_pte,
  input  logic [WALK_LEVELS-1:0]         walk_resp_levels,
  input  logic                           walk_resp_ept_nt,
  output logic                           page_fault,
  // TLB and cache maintenance
  input  logic                           tlb_inval_valid,
  input  vpn_t                           tlb_inval_vpn,
  input  logic                           tlb_flush_all,
  input  logic                           llc_flush_valid,
  input  logic [PA_BITS-1:0]             llc_flush_paddr,
  output logic                           llc_evict,
  // taint MSRs and interrupts
  input  logic                           msr_wr,
  input  logic [31:0]                    msr_addr,
  input  logic [63:0]                    msr_wdata,
  output logic [63:0]                    msr_rdata,
  output logic                           msr_hit,
  input  logic                           intr_take,
  input  logic                           iret,
  output taint_vec_t                     arch_taint,
  output taint_vec_t                     spec_taint,
  output taint_vec_t                     shadow_taint
);
  // ----------------------------------------------------------- translation
  logic is_load, is_store, is_mem;
  assign is_load  = iss_uop.kind == OP_LOAD;
  assign is_store = iss_uop.kind == OP_STORE;
  assign is_mem   = is_load | is_store;

  vpn_t lk_vpn;
  logic lk_hit, lk_nt;
  ppn_t lk_ppn;
  assign lk_vpn = iss_uop.vaddr[VA_BITS-1:PAGE_BITS];

  logic wk_nt, wk_present;
  ppn_t wk_ppn;

  pte_nt_decode #(.NT_MODE(NT_MODE)) u_pte (
    .pte          (walk_resp_pte),
    .level_used   (walk_resp_levels),
    .ept_nt       (walk_resp_ept_nt),
    .cr_nt_enable (cr_nt_enable),
    .pat          (pat),
    .nt           (wk_nt),
    .present      (wk_present),
    .ppn          (wk_ppn)
  );

  nt_tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk         (clk),
    .rst_n       (rst_n),
    .lk_vpn      (lk_vpn),
    .lk_hit      (lk_hit),
    .lk_ppn      (lk_ppn),
    .lk_nt       (lk_nt),
    .fill_valid  (walk_resp_valid && wk_present),
    .fill_vpn    (walk_resp_vpn),
    .fill_ppn    (wk_ppn),
    .fill_nt     (wk_nt),
    .inval_valid (tlb_inval_valid),
    .inval_vpn   (tlb_inval_vpn),
    .flush_all   (tlb_flush_all)
  );

  assign page_fault = walk_resp_valid && !wk_present;

  // ----------------------------------------------------------- acceptance
  logic llc_ready, cmt_store;
  assign cmt_store = cmt_valid && cmt_uop.kind == OP_STORE;
  assign iss_ready = !is_mem || (lk_hit && llc_ready && !(is_load && cmt_store));
  logic accept;
  assign accept    = iss_valid && iss_ready;
  assign walk_req  = iss_valid && is_mem && !lk_hit;
  assign walk_vpn  = lk_vpn;

  // ----------------------------------------------------------- cache taint
  logic [NUM_SRC-1:0] src_taint;
  logic ld_taint, llc_hit;
  logic [PA_BITS-1:0] paddr;
  assign paddr = {lk_ppn, iss_uop.vaddr[PAGE_BITS-1:0]};

  // Loads read the taint at issue; stores stay in the store buffer until
  // they commit and then write the architectural taint of the stored
  // register. A committing store has the port, a load waits a cycle.
  logic llc_acc;
  assign llc_acc = (accept && is_load) || cmt_store;

  taint_cache #(.SETS(LLC_SETS), .WAYS(LLC_WAYS)) u_llc (
    .clk          (clk),
    .rst_n        (rst_n),
    .ready        (llc_ready),
    .acc_valid    (llc_acc),
    .acc_write    (cmt_store),
    .acc_paddr    (cmt_store ? cmt_paddr : paddr),
    .acc_page_nt  (cmt_store ? cmt_mem_taint : lk_nt),
    .acc_st_taint (arch_taint[cmt_uop.src[0]]),
    .acc_hit      (llc_hit),
    .ld_taint     (ld_taint),
    .flush_valid  (llc_flush_valid),
    .flush_paddr  (llc_flush_paddr),
    .evict_valid  (llc_evict)
  );

  // LOAD: taint of the word read; STORE: NT bit of the page written.
  logic mem_taint;
  assign mem_taint = is_load ? ld_taint : (is_store ? lk_nt : 1'b0);

  // ----------------------------------------------------------- register taint
  logic       bulk_wr;
  taint_vec_t bulk_data;

  taint_regfile u_rf (
    .clk           (clk),
    .rst_n         (rst_n),
    .iss_valid     (accept),
    .iss_uop       (iss_uop),
    .iss_mem_taint (mem_taint),
    .src_taint     (src_taint),
    .iss_dst_taint (out_dst_taint),
    .cmt_valid     (cmt_valid),
    .cmt_uop       (cmt_uop),
    .cmt_mem_taint (cmt_mem_taint),
    .squash        (squash),
    .bulk_wr       (bulk_wr),
    .bulk_data     (bulk_data),
    .spec_taint    (spec_taint),
    .arch_taint    (arch_taint)
  );

  taint_msr u_msr (
    .clk          (clk),
    .rst_n        (rst_n),
    .msr_wr       (msr_wr),
    .msr_addr     (msr_addr),
    .msr_wdata    (msr_wdata),
    .msr_rdata    (msr_rdata),
    .msr_hit      (msr_hit),
    .intr_take    (intr_take),
    .iret         (iret),
    .cur_taint    (arch_taint),
    .taint_wr     (bulk_wr),
    .taint_wdata  (bulk_data),
    .shadow_taint (shadow_taint)
  );

  // ----------------------------------------------------------- operand gate
  nt_operand_gate #(.DATA_W(DATA_W)) u_gate (
    .nt_enable  (cr_nt_enable),
    .transient  (iss_uop.transient),
    .src_valid  (iss_uop.src_valid),
    .src_taint  (src_taint),
    .src_data   (iss_src_data),
    .mem_valid  (is_load),
    .mem_taint  (mem_taint),
    .mem_data   (iss_mem_data),
    .src_data_o (out_src_data),
    .mem_data_o (out_mem_data),
    .src_masked (out_src_masked),
    .mem_masked (out_mem_masked),
    .suppress   (out_suppress)
  );

  assign out_mem_taint = mem_taint;
  assign out_paddr     = paddr;
  assign out_llc_hit   = llc_hit && is_load;

  // The core serialises MSR accesses, interrupts and returns from interrupt
  // against micro-op issue.
  a_serialised: assert property (@(posedge clk) disable iff (!rst_n)
    (msr_wr || intr_take || iret) |-> !iss_valid);

endmodule
