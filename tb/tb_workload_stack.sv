// tb_workload_stack: register spills to a non-transient stack, at the stack
// sizes measured for the GNU core utilities: 3528 bytes (the usage most
// programs reach with a separate unprotected stack for local variables),
// 4.7 KB (average with that compiler change) and 8.2 KB (average with a
// single, fully non-transient stack). The unit runs at its default sizes.
//
// For each size the testbench spills one register per 8-byte stack slot,
// tainted (loaded from the secret page) or not (set by an immediate) at
// random, then reloads every slot transiently, as a return path would under
// speculation. Because every line stays in the cache, each reload must
// carry exactly the taint of the value spilled there: tainted values read
// as the dummy value, untainted ones read normally, and no reload is
// over-tainted even though the whole stack is non-transient. The reloads
// must also run one per cycle without a stall once the stack pages are in
// the TLB.
module tb_workload_stack;
  import contxt_pkg::*;

  localparam logic [47:0] SECRET_VA = 48'h0000_005E_C000;
  localparam logic [47:0] STACK_TOP0 = 48'h0000_7FFF_0000;

  logic clk = 0, rst_n = 0;
  logic cr_nt_enable = 1;
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
  logic tlb_inval_valid = 0, tlb_flush_all = 0, llc_flush_valid = 0, llc_evict;
  vpn_t tlb_inval_vpn = '0;
  logic [PA_BITS-1:0] llc_flush_paddr = '0;
  logic msr_wr = 0, msr_hit, intr_take = 0, iret = 0;
  logic [31:0] msr_addr = '0;
  logic [63:0] msr_wdata = '0, msr_rdata;
  taint_vec_t arch_taint, spec_taint, shadow_taint;
  int walks;

  contxt_top dut (.*);
  walker_model #(.NT_VPN(vpn_t'(SECRET_VA >> 12)), .STACK_VPN_LO(36'h7FFC0),
                 .STACK_VPN_HI(36'h7FFFF)) u_walk (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

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

  // issue one micro-op; returns stall cycles, memory taint and data seen
  task automatic issue(input uop_t u, input logic [63:0] mem, output int stall,
                       output logic mt, output logic [63:0] md, output logic hit);
    stall = 0;
    iss_valid = 1; iss_uop = u; iss_src_data = '0; iss_mem_data = mem;
    #1;
    while (!iss_ready) begin @(posedge clk); #1; stall++; end
    mt = out_mem_taint; md = out_mem_data; hit = out_llc_hit;
    @(posedge clk); #1;
    iss_valid = 0;
  endtask

  task automatic arch_op(uop_t u, logic [63:0] mem);
    int s; logic mt, hit; logic [63:0] md;
    issue(u, mem, s, mt, md, hit);
    cmt_valid = 1; cmt_uop = u; cmt_mem_taint = mt; cmt_paddr = out_paddr;
    @(posedge clk); #1;
    cmt_valid = 0;
  endtask

  task automatic run_stack(string name, int bytes, logic [47:0] top);
    int slots, stalls, over, saved_by_bits, t0, t1, s;
    logic exp [];
    logic mt, hit; logic [63:0] md, val;
    slots = (bytes + 7) / 8;
    exp = new[slots];
    // calls: spill
    for (int i = 0; i < slots; i++) begin
      exp[i] = 1'($urandom);
      if (exp[i]) arch_op(mk(OP_LOAD, 3, -1, -1, SECRET_VA + 48'(8 * (i % 8))), 64'h5EC);
      else        arch_op(mk(OP_IMM, 3), 0);
      arch_op(mk(OP_STORE, -1, 3, 4, top - 48'(8 * (i + 1))), 0);
    end
    // returns: transient reloads
    stalls = 0; over = 0; saved_by_bits = 0;
    t0 = $time;
    for (int i = slots - 1; i >= 0; i--) begin
      val = 64'(i) + 64'h1000;
      issue(mk(OP_LOAD, 1, 4, -1, top - 48'(8 * (i + 1)), 1), val, s, mt, md, hit);
      stalls += s;
      check({name, " reload taint"}, 64'(mt), 64'(exp[i]));
      check({name, " reload value"}, md, exp[i] ? 64'd0 : val);
      check({name, " line resident"}, 64'(hit), 1);
      if (mt && !exp[i]) over++;
      if (!exp[i]) saved_by_bits++;
    end
    t1 = $time;
    squash = 1; @(posedge clk); #1; squash = 0;
    check({name, " no stall on reloads"}, 64'(stalls), 0);
    check({name, " one reload per cycle"}, 64'((t1 - t0) / 10), 64'(slots));
    check({name, " no over-tainting"}, 64'(over), 0);
    $display("%s: %0d bytes, %0d slots, %0d lines, %0d pages; untainted reloads kept usable by the cache taint bits: %0d",
             name, bytes, slots, (slots + 7) / 8, (bytes + 4095) / 4096, saved_by_bits);
  endtask

  initial begin
    iss_valid = 0; iss_uop = '0; iss_src_data = '0; iss_mem_data = '0;
    cmt_valid = 0; cmt_uop = '0; cmt_mem_taint = 0; squash = 0; cmt_paddr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!dut.u_llc.ready) @(posedge clk);
    #1;
    run_stack("coreutils, separate unprotected stack, minimum", 3528, STACK_TOP0);
    run_stack("coreutils, separate unprotected stack, average", 4813, STACK_TOP0 - 48'h1_0000);
    run_stack("coreutils, single non-transient stack, average", 8397, STACK_TOP0 - 48'h2_0000);
    check("walks happened", 64'(walks > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
