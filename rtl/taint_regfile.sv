// taint_regfile: the non-transient (taint) bit of every architectural
// register, with the rules by which instructions set and clear it.
//
// There is one bit per register (16 general purpose, 8 floating point,
// 32 vector); a register is tainted as a whole even when only part of it is
// written or read. The rules, applied to the one destination of a micro-op:
//   ALU      taint = OR of the taints of its register sources
//   LOAD     taint = taint of the memory word | OR of its register sources
//   IMM      taint cleared: the register is wholly replaced by an immediate
//            or by a zeroing idiom such as xor rax,rax
//   REP_ALU  rep-prefixed arithmetic/logic: the destination keeps its taint
//            (and also picks up tainted sources)
//   STORE    no register is written; storing a register to a normal
//            (not non-transient) page clears that register's taint
// Only a write that replaces the whole register may untaint it: the core
// must present a partial-register write (mov al, 5) as a merge that also
// lists the destination as a source, as register-renaming cores already do.
// Taint tracking is always on; it is harmless while no page is non-transient.
//
// Two copies are kept. The speculative copy is updated when a micro-op
// issues, so that a transient instruction that depends on a transiently
// loaded secret already sees the taint. The architectural copy is updated
// when the same micro-op commits. A squash copies the architectural copy
// (including a commit of the same cycle) into the speculative one. A bulk
// write (IA32_TAINT write, return from interrupt) sets both copies.
//
// Interface and timing: src_taint reads the speculative copy for the issue
// port's sources and is combinational; all updates happen at the clock edge.
// Priority: bulk write over squash over issue.
//
// From the paper: one bit per register, the propagation, untainting and rep
// rules. Chosen here: the speculative/architectural pair (the paper's
// evaluation uses an in-order emulator and is silent on rollback), one
// destination per micro-op, and rep meaning "never lose taint".
module taint_regfile
  import contxt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // issue (speculative)
  input  logic       iss_valid,
  input  uop_t       iss_uop,
  input  logic       iss_mem_taint,   // LOAD: word taint, STORE: NT bit of the page
  output logic [NUM_SRC-1:0] src_taint,
  output logic       iss_dst_taint,   // taint the destination receives
  // commit (architectural)
  input  logic       cmt_valid,
  input  uop_t       cmt_uop,
  input  logic       cmt_mem_taint,
  // squash of all uncommitted micro-ops
  input  logic       squash,
  // bulk write of all taint bits
  input  logic       bulk_wr,
  input  taint_vec_t bulk_data,
  // state
  output taint_vec_t spec_taint,
  output taint_vec_t arch_taint
);

  function automatic logic dst_taint_of(taint_vec_t t, uop_t u, logic mem_taint);
    logic s;
    s = 1'b0;
    for (int unsigned i = 0; i < NUM_SRC; i++)
      if (u.src_valid[i]) s = s | t[u.src[i]];
    unique case (u.kind)
      OP_ALU:     return s;
      OP_LOAD:    return s | mem_taint;
      OP_IMM:     return 1'b0;
      OP_REP_ALU: return s | t[u.dst];
      default:    return t[u.dst];
    endcase
  endfunction

  function automatic taint_vec_t apply(taint_vec_t t, uop_t u, logic mem_taint);
    taint_vec_t n;
    n = t;
    if (u.kind == OP_STORE) begin
      if (u.src_valid[0] && !mem_taint) n[u.src[0]] = 1'b0;
    end else if (u.kind != OP_NONE && u.dst_valid) begin
      n[u.dst] = dst_taint_of(t, u, mem_taint);
    end
    return n;
  endfunction

  taint_vec_t spec_q, arch_q, arch_n;

  always_comb
    for (int unsigned i = 0; i < NUM_SRC; i++)
      src_taint[i] = iss_uop.src_valid[i] & spec_q[iss_uop.src[i]];

  assign iss_dst_taint = dst_taint_of(spec_q, iss_uop, iss_mem_taint);
  assign arch_n        = cmt_valid ? apply(arch_q, cmt_uop, cmt_mem_taint) : arch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spec_q <= '0;
      arch_q <= '0;
    end else if (bulk_wr) begin
      spec_q <= bulk_data;
      arch_q <= bulk_data;
    end else begin
      arch_q <= arch_n;
      if (squash)         spec_q <= arch_n;
      else if (iss_valid) spec_q <= apply(spec_q, iss_uop, iss_mem_taint);
    end
  end

  assign spec_taint = spec_q;
  assign arch_taint = arch_q;

  a_src_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid |-> (iss_uop.dst < REG_W'(NUM_REGS)));

endmodule
