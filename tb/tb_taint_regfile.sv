// tb_taint_regfile: checks the register taint rules.
// Directed part: a load from non-transient memory taints rax; shl/and on rax
// keep it tainted; a partial (8-bit) use still taints the whole destination;
// mov rax, 0 untaints; xor rcx,rcx untaints but rep xor rcx,rcx keeps the
// taint; storing a tainted register to a normal page untaints it, to a
// non-transient page does not; a squash drops speculative taint; a bulk
// write sets both copies. Random part: 5000 cycles of random issue, commit,
// squash and bulk writes compared with a bit-array reference.
module tb_taint_regfile;
  import contxt_pkg::*;

  logic clk = 0, rst_n = 0;
  logic iss_valid, iss_mem_taint, iss_dst_taint, cmt_valid, cmt_mem_taint, squash, bulk_wr;
  uop_t iss_uop, cmt_uop;
  logic [NUM_SRC-1:0] src_taint;
  taint_vec_t bulk_data, spec_taint, arch_taint;
  int checks = 0, failures = 0;

  taint_regfile dut (.*);
  always #5 clk = ~clk;

  bit m_spec [NUM_REGS];
  bit m_arch [NUM_REGS];

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic uop_t mk(op_kind_e k, int d, int s0, int s1 = -1, int s2 = -1);
    uop_t u;
    u = '0;
    u.kind = k;
    u.dst_valid = d >= 0; u.dst = reg_idx_t'(d < 0 ? 0 : d);
    u.src_valid = {s2 >= 0, s1 >= 0, s0 >= 0};
    u.src[0] = reg_idx_t'(s0 < 0 ? 0 : s0);
    u.src[1] = reg_idx_t'(s1 < 0 ? 0 : s1);
    u.src[2] = reg_idx_t'(s2 < 0 ? 0 : s2);
    return u;
  endfunction

  // reference rule, written out case by case
  task automatic ref_apply(ref bit t[NUM_REGS], input uop_t u, input logic mt);
    bit any;
    any = 0;
    for (int i = 0; i < NUM_SRC; i++) if (u.src_valid[i] && t[u.src[i]]) any = 1;
    case (u.kind)
      OP_ALU:     if (u.dst_valid) t[u.dst] = any;
      OP_LOAD:    if (u.dst_valid) t[u.dst] = any | mt;
      OP_IMM:     if (u.dst_valid) t[u.dst] = 0;
      OP_REP_ALU: if (u.dst_valid) t[u.dst] = t[u.dst] | any;
      OP_STORE:   if (u.src_valid[0] && !mt) t[u.src[0]] = 0;
      default: ;
    endcase
  endtask

  task automatic compare();
    for (int i = 0; i < NUM_REGS; i++) begin
      check($sformatf("spec r%0d", i), 64'(spec_taint[i]), 64'(m_spec[i]));
      check($sformatf("arch r%0d", i), 64'(arch_taint[i]), 64'(m_arch[i]));
    end
  endtask

  // issue and commit one uop in the same cycle
  task automatic step(uop_t u, logic mt);
    iss_valid = 1; iss_uop = u; iss_mem_taint = mt;
    cmt_valid = 1; cmt_uop = u; cmt_mem_taint = mt;
    ref_apply(m_spec, u, mt);
    ref_apply(m_arch, u, mt);
    @(posedge clk); #1;
    iss_valid = 0; cmt_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < NUM_REGS; i++) begin m_spec[i] = 0; m_arch[i] = 0; end
    iss_valid = 0; cmt_valid = 0; squash = 0; bulk_wr = 0; bulk_data = '0;
    iss_uop = '0; cmt_uop = '0; iss_mem_taint = 0; cmt_mem_taint = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    step(mk(OP_LOAD, 0, 0, 7), 1);           // mov (rax+rdi), al  from NT memory
    check("load taints rax", 64'(arch_taint[0]), 1);
    step(mk(OP_ALU, 0, 0), 0);               // shl 12, rax
    step(mk(OP_ALU, 3, 0), 0);               // mov al, bl (partial read)
    check("partial use taints whole rbx", 64'(arch_taint[3]), 1);
    iss_uop = mk(OP_ALU, 2, 0, 1); #1;
    check("src_taint read", 64'(src_taint), 64'b001);
    check("dst taint preview", 64'(iss_dst_taint), 1);
    step(mk(OP_IMM, 0, -1), 0);              // mov 0, rax
    check("immediate untaints", 64'(arch_taint[0]), 0);
    step(mk(OP_LOAD, 1, 4), 1);              // rcx <- NT stack
    step(mk(OP_REP_ALU, 1, 1, 1), 0);        // rep xor rcx, rcx
    check("rep keeps taint", 64'(arch_taint[1]), 1);
    step(mk(OP_IMM, 1, -1), 0);              // xor rcx, rcx
    check("zero idiom untaints", 64'(arch_taint[1]), 0);
    step(mk(OP_STORE, -1, 3, 4), 1);         // spill rbx to NT stack
    check("store to NT keeps taint", 64'(arch_taint[3]), 1);
    step(mk(OP_STORE, -1, 3, 4), 0);         // write rbx to normal memory
    check("store to normal untaints", 64'(arch_taint[3]), 0);
    // speculative only, then squash
    iss_valid = 1; iss_uop = mk(OP_LOAD, 5, 6); iss_mem_taint = 1;
    @(posedge clk); #1; iss_valid = 0;
    check("spec tainted", 64'(spec_taint[5]), 1);
    check("arch untouched", 64'(arch_taint[5]), 0);
    squash = 1; @(posedge clk); #1; squash = 0;
    check("squash restores", 64'(spec_taint[5]), 0);
    bulk_wr = 1; bulk_data = taint_vec_t'({$urandom, $urandom});
    for (int i = 0; i < NUM_REGS; i++) begin m_spec[i] = bulk_data[i]; m_arch[i] = bulk_data[i]; end
    @(posedge clk); #1; bulk_wr = 0;
    compare();

    for (int n = 0; n < 5000; n++) begin
      uop_t u, c; logic mt, cm; int r;
      u = mk(op_kind_e'($urandom % 6), $urandom % NUM_REGS, $urandom % NUM_REGS,
             ($urandom % 2) ? int'($urandom % NUM_REGS) : -1, ($urandom % 4 == 0) ? int'($urandom % NUM_REGS) : -1);
      c = mk(op_kind_e'($urandom % 6), $urandom % NUM_REGS, $urandom % NUM_REGS, $urandom % NUM_REGS);
      mt = 1'($urandom); cm = 1'($urandom);
      r = $urandom % 100;
      iss_valid = r < 70; iss_uop = u; iss_mem_taint = mt;
      cmt_valid = (r % 3) == 0; cmt_uop = c; cmt_mem_taint = cm;
      squash = r >= 94; bulk_wr = r == 93; bulk_data = taint_vec_t'({$urandom, $urandom});
      #1;
      begin
        bit any; any = 0;
        for (int i = 0; i < NUM_SRC; i++) if (u.src_valid[i] && m_spec[u.src[i]]) any = 1;
        for (int i = 0; i < NUM_SRC; i++)
          check("src_taint", 64'(src_taint[i]), 64'(u.src_valid[i] && m_spec[u.src[i]]));
      end
      if (bulk_wr) begin
        for (int i = 0; i < NUM_REGS; i++) begin m_spec[i] = bulk_data[i]; m_arch[i] = bulk_data[i]; end
      end else begin
        if (cmt_valid) ref_apply(m_arch, c, cm);
        if (squash) m_spec = m_arch;
        else if (iss_valid) ref_apply(m_spec, u, mt);
      end
      @(posedge clk); #1;
      compare();
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
