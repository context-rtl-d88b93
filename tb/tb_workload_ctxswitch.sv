// tb_workload_ctxswitch: context switches between tasks that hold secrets
// in registers, following the save/restore sequence the operating system
// runs around every interrupt or system call:
//   interrupt          hardware copies the taint to IA32_SHADOW_TAINT
//   pushall, rep xor rcx,rcx, rdmsr IA32_SHADOW_TAINT -> saved with the task
//   (kernel work, which taints and untaints registers freely)
//   wrmsr IA32_TAINT <- next task's saved taint (shadow follows)
//   pop rax, rcx, rdx  (from the non-transient kernel stack: tainted)
//   iret               hardware copies the shadow back
// Four tasks, 300 switches. Each task's register taint is predicted by a
// reference that applies the taint rules to the task's own micro-ops; after
// every iret the unit's taint must equal the resumed task's, and the
// hardware part of each switch (capture and restore) must add no cycles.
module tb_workload_ctxswitch;
  import contxt_pkg::*;

  localparam logic [47:0] SECRET_VA = 48'h0000_005E_C000;
  localparam logic [47:0] KSTACK_VA = 48'h0000_7FFF_8000;
  localparam int TASKS = 4, SWITCHES = 300;

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
  logic msr_wr, msr_hit, intr_take, iret;
  logic [31:0] msr_addr;
  logic [63:0] msr_wdata, msr_rdata;
  taint_vec_t arch_taint, spec_taint, shadow_taint;
  int walks;

  contxt_top dut (.*);
  walker_model #(.NT_VPN(vpn_t'(SECRET_VA >> 12)), .STACK_VPN_LO(vpn_t'(KSTACK_VA >> 12)),
                 .STACK_VPN_HI(vpn_t'(KSTACK_VA >> 12))) u_walk (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic uop_t mk(op_kind_e k, int d, int s0 = -1, int s1 = -1, logic [47:0] va = '0);
    uop_t u;
    u = '0;
    u.kind = k; u.vaddr = va;
    u.dst_valid = d >= 0; u.dst = reg_idx_t'(d < 0 ? 0 : d);
    u.src_valid = {1'b0, s1 >= 0, s0 >= 0};
    u.src[0] = reg_idx_t'(s0 < 0 ? 0 : s0);
    u.src[1] = reg_idx_t'(s1 < 0 ? 0 : s1);
    return u;
  endfunction

  // issue and commit an architectural micro-op
  task automatic arch_op(uop_t u);
    logic mt; logic [PA_BITS-1:0] pa;
    iss_valid = 1; iss_uop = u; iss_src_data = '0; iss_mem_data = '0;
    #1;
    while (!iss_ready) begin @(posedge clk); #1; end
    mt = out_mem_taint; pa = out_paddr;
    @(posedge clk); #1;
    iss_valid = 0;
    cmt_valid = 1; cmt_uop = u; cmt_mem_taint = mt; cmt_paddr = pa;
    @(posedge clk); #1;
    cmt_valid = 0;
  endtask

  // a random task micro-op, applied to the reference as well
  task automatic task_op(inout taint_vec_t m);
    int d, s0, s1, k;
    d = $urandom % NUM_REGS; s0 = $urandom % NUM_REGS; s1 = $urandom % NUM_REGS;
    k = $urandom % 4;
    case (k)
      0: begin arch_op(mk(OP_LOAD, d, -1, -1, SECRET_VA + 48'(8 * ($urandom % 16)))); m[d] = 1; end
      1: begin arch_op(mk(OP_IMM, d)); m[d] = 0; end
      2: begin arch_op(mk(OP_ALU, d, s0, s1)); m[d] = m[s0] | m[s1]; end
      default: begin arch_op(mk(OP_STORE, -1, s0, -1, 48'h0000_0040_0000)); m[s0] = 0; end
    endcase
  endtask

  initial begin
    taint_vec_t model [TASKS];
    taint_vec_t saved [TASKS];
    int cur, nxt, t_int, t_ret, n_switch;
    msr_wr = 0; msr_addr = '0; msr_wdata = '0; intr_take = 0; iret = 0;
    iss_valid = 0; iss_uop = '0; iss_src_data = '0; iss_mem_data = '0;
    cmt_valid = 0; cmt_uop = '0; cmt_mem_taint = 0; squash = 0; cmt_paddr = '0;
    for (int i = 0; i < TASKS; i++) begin model[i] = '0; saved[i] = '0; end
    n_switch = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!dut.u_llc.ready) @(posedge clk);
    #1;
    cur = 0;
    for (int sw = 0; sw < SWITCHES; sw++) begin
      // task runs
      repeat (1 + $urandom % 6) task_op(model[cur]);
      check("task taint", 64'(arch_taint), 64'(model[cur]));
      // interrupt: capture is done at the edge that takes the interrupt
      t_int = $time;
      intr_take = 1; @(posedge clk); #1; intr_take = 0;
      check("capture in one cycle", 64'(($time - t_int) / 10), 1);
      check("shadow = interrupted task", 64'(shadow_taint), 64'(model[cur]));
      // handler prologue
      arch_op(mk(OP_STORE, -1, 0, -1, KSTACK_VA));          // pushall (NT stack)
      arch_op(mk(OP_REP_ALU, 1, 1, 1));                      // rep xor rcx, rcx
      msr_addr = MSR_IA32_SHADOW_TAINT; #1;
      saved[cur] = msr_rdata[NUM_REGS-1:0];
      check("saved taint", 64'(saved[cur]), 64'(model[cur]));
      // kernel work
      repeat (3) begin
        taint_vec_t junk;
        junk = arch_taint;
        task_op(junk);
      end
      // switch to another task
      nxt = $urandom % TASKS;
      msr_wr = 1; msr_addr = MSR_IA32_TAINT; msr_wdata = 64'(saved[nxt]);
      @(posedge clk); #1; msr_wr = 0;
      arch_op(mk(OP_LOAD, 0, 4, -1, KSTACK_VA));             // pop rax, rcx, rdx
      arch_op(mk(OP_LOAD, 1, 4, -1, KSTACK_VA + 8));
      arch_op(mk(OP_LOAD, 2, 4, -1, KSTACK_VA + 16));
      t_ret = $time;
      iret = 1; @(posedge clk); #1; iret = 0;
      check("restore in one cycle", 64'(($time - t_ret) / 10), 1);
      check("resumed task taint", 64'(arch_taint), 64'(saved[nxt]));
      check("resumed speculative taint", 64'(spec_taint), 64'(saved[nxt]));
      if (arch_taint == saved[nxt]) n_switch++;
      cur = nxt;
    end
    check("switches", 64'(n_switch), SWITCHES);
    $display("context switches with taint restored: %0d of %0d", n_switch, SWITCHES);
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
