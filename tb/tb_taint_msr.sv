// tb_taint_msr: checks IA32_TAINT / IA32_SHADOW_TAINT around an interrupt.
// The testbench holds the register taint bits itself (as taint_regfile would)
// and applies taint_wr. Sequence: a context with known taint is interrupted
// (shadow = its taint), the handler changes register taint, reads the shadow
// to save it, writes IA32_TAINT with the saved value (shadow follows), iret
// restores it. Also: reads of unknown MSR addresses return 0 and no hit,
// bits 56..63 read as 0, a nested interrupt overwrites the shadow, and a
// random sequence against a reference.
module tb_taint_msr;
  import contxt_pkg::*;

  logic clk = 0, rst_n = 0;
  logic msr_wr, msr_hit, intr_take, iret, taint_wr;
  logic [31:0] msr_addr;
  logic [63:0] msr_wdata, msr_rdata;
  taint_vec_t cur_taint, taint_wdata, shadow_taint;
  int checks = 0, failures = 0;

  taint_msr dut (.*);
  always #5 clk = ~clk;

  // the register taint bits, updated by taint_wr like the register file
  always_ff @(posedge clk) if (taint_wr) cur_taint <= taint_wdata;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  task automatic idle(); msr_wr = 0; intr_take = 0; iret = 0; endtask
  task automatic cyc(); @(posedge clk); #1; idle(); endtask

  initial begin
    taint_vec_t ctx, saved, m_shadow;
    idle(); msr_addr = '0; msr_wdata = '0; cur_taint = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ctx = taint_vec_t'(64'h00A5_0000_F00F_0001);
    cur_taint = ctx; #1;
    msr_addr = MSR_IA32_TAINT; #1;
    check("read IA32_TAINT", msr_rdata, 64'(ctx));
    check("hit", 64'(msr_hit), 1);
    // interrupt
    intr_take = 1; cyc();
    msr_addr = MSR_IA32_SHADOW_TAINT; #1;
    check("shadow holds interrupted taint", msr_rdata, 64'(ctx));
    // the handler overwrites registers (all become untainted / tainted)
    cur_taint = '1; #1;
    saved = msr_rdata[NUM_REGS-1:0];
    msr_addr = MSR_IA32_TAINT; #1;
    check("upper MSR bits zero", msr_rdata[63:56], 0);
    // restore sequence: wrmsr IA32_TAINT then iret
    msr_wr = 1; msr_addr = MSR_IA32_TAINT; msr_wdata = 64'(saved); #1;
    check("taint_wr on wrmsr", 64'(taint_wr), 1);
    cyc();
    check("wrmsr writes taint", 64'(cur_taint), 64'(saved));
    msr_addr = MSR_IA32_SHADOW_TAINT; #1;
    check("wrmsr also updates shadow", msr_rdata, 64'(saved));
    cur_taint = '0; // clobbered by popall of the handler
    iret = 1; cyc();
    check("iret restores", 64'(cur_taint), 64'(ctx));
    // nested interrupt overwrites the shadow
    intr_take = 1; cyc();
    cur_taint = taint_vec_t'(64'h1234); #1;
    intr_take = 1; cyc();
    msr_addr = MSR_IA32_SHADOW_TAINT; #1;
    check("nested interrupt overwrites shadow", msr_rdata, 64'h1234);
    msr_addr = 32'h10; #1;
    check("other MSR reads 0", msr_rdata, 0);
    check("other MSR no hit", 64'(msr_hit), 0);
    msr_wr = 1; msr_wdata = '1; cyc();
    check("other MSR write ignored", 64'(cur_taint), 64'h1234);
    msr_addr = MSR_IA32_SHADOW_TAINT; #1;
    check("shadow unchanged by other MSR", msr_rdata, 64'h1234);

    m_shadow = shadow_taint;
    for (int n = 0; n < 2000; n++) begin
      taint_vec_t exp_cur;
      int r;
      r = $urandom % 4;
      idle();
      msr_addr = ($urandom % 2) ? MSR_IA32_TAINT : MSR_IA32_SHADOW_TAINT;
      msr_wdata = {$urandom, $urandom};
      exp_cur = cur_taint;
      case (r)
        0: begin intr_take = 1; m_shadow = cur_taint; end
        1: begin iret = 1; exp_cur = m_shadow; end
        2: begin msr_wr = 1; m_shadow = msr_wdata[NUM_REGS-1:0];
                 if (msr_addr == MSR_IA32_TAINT) exp_cur = msr_wdata[NUM_REGS-1:0]; end
        default: ;
      endcase
      #1;
      if (!msr_wr) check("rand read", msr_rdata,
                         msr_addr == MSR_IA32_TAINT ? 64'(cur_taint) : 64'(shadow_taint));
      cyc();
      check("rand taint", 64'(cur_taint), 64'(exp_cur));
      check("rand shadow", 64'(shadow_taint), 64'(m_shadow));
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
