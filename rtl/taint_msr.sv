// taint_msr: the two model-specific registers through which software sees
// the register taint bits, IA32_TAINT and IA32_SHADOW_TAINT.
//
// IA32_TAINT is not a storage register: reading it returns the current
// architectural taint bits (bit i is register i, bits 56..63 read as zero)
// and writing it overwrites all taint bits at once. Because an interrupt
// handler must not clobber registers before it can save them, the taint of
// the interrupted context is copied to IA32_SHADOW_TAINT by the hardware on
// every interrupt; the return from interrupt copies it back. A write to
// IA32_TAINT also writes IA32_SHADOW_TAINT, so an operating system that
// restores a task's taint with wrmsr right before iret gets that taint after
// iret. IA32_SHADOW_TAINT can be read and written like any other MSR.
//
// Interface and timing: rdata is combinational from msr_addr; writes,
// interrupt capture (intr_take) and iret restore take effect at the clock edge, and the
// restore/overwrite of the taint bits is sent to taint_regfile through
// taint_wr/taint_wdata in the same cycle. An interrupt and an iret never
// arrive together; if they did, the interrupt wins.
//
// From the paper: both MSRs, 56 bits in one 64-bit MSR, copy on interrupt,
// restore on iret, the write to IA32_TAINT also updating the shadow.
// Chosen here: the MSR addresses, the register order inside the MSR, and
// that the shadow is directly writable.
module taint_msr
  import contxt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        msr_wr,
  input  logic [31:0] msr_addr,
  input  logic [63:0] msr_wdata,
  output logic [63:0] msr_rdata,
  output logic        msr_hit,       // the address is one of the two taint MSRs
  input  logic        intr_take,
  input  logic        iret,
  input  taint_vec_t  cur_taint,     // architectural taint bits
  output logic        taint_wr,
  output taint_vec_t  taint_wdata,
  output taint_vec_t  shadow_taint
);
  taint_vec_t shadow_q;

  logic wr_taint, wr_shadow;
  assign wr_taint  = msr_wr && msr_addr == MSR_IA32_TAINT;
  assign wr_shadow = msr_wr && msr_addr == MSR_IA32_SHADOW_TAINT;
  assign msr_hit   = msr_addr == MSR_IA32_TAINT || msr_addr == MSR_IA32_SHADOW_TAINT;

  always_comb begin
    msr_rdata = '0;
    if (msr_addr == MSR_IA32_TAINT)             msr_rdata[NUM_REGS-1:0] = cur_taint;
    else if (msr_addr == MSR_IA32_SHADOW_TAINT) msr_rdata[NUM_REGS-1:0] = shadow_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    shadow_q <= '0;
    else if (intr_take)            shadow_q <= cur_taint;
    else if (wr_taint || wr_shadow) shadow_q <= msr_wdata[NUM_REGS-1:0];
  end

  assign taint_wr    = !intr_take && (wr_taint || iret);
  assign taint_wdata = wr_taint ? msr_wdata[NUM_REGS-1:0] : shadow_q;
  assign shadow_taint = shadow_q;

  a_no_int_and_iret: assert property (@(posedge clk) disable iff (!rst_n) !(intr_take && iret));

endmodule
