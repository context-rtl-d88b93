// tb_nt_operand_gate: random test of the operand gate. A reference written
// from the rule "a tainted operand of a transient micro-op reads as the
// dummy value while the feature is enabled; a tainted register source also
// suppresses the micro-op" is compared with the gate for 2000 random input
// sets, plus the directed case of the Spectre example (a load from
// non-transient memory is not suppressed, its dependant is).
module tb_nt_operand_gate;
  import contxt_pkg::*;

  logic                      nt_enable, transient, mem_valid, mem_taint;
  logic [NUM_SRC-1:0]        src_valid, src_taint;
  logic [NUM_SRC-1:0][63:0]  src_data, src_data_o;
  logic [63:0]               mem_data, mem_data_o;
  logic [NUM_SRC-1:0]        src_masked;
  logic                      mem_masked, suppress;

  int checks = 0, failures = 0;

  nt_operand_gate dut (.*);

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic compare();
    logic g, sup;
    g   = nt_enable && transient;
    sup = 1'b0;
    for (int i = 0; i < NUM_SRC; i++) begin
      if (g && src_valid[i] && src_taint[i]) begin
        check("src dummy", src_data_o[i], 64'd0);
        sup = 1'b1;
      end else begin
        check("src pass", src_data_o[i], src_data[i]);
      end
    end
    check("mem", mem_data_o, (g && mem_valid && mem_taint) ? 64'd0 : mem_data);
    check("suppress", 64'(suppress), 64'(sup));
  endtask

  initial begin
    // Spectre example: transient load of a secret from NT memory
    nt_enable = 1; transient = 1;
    src_valid = 3'b011; src_taint = 3'b000;
    src_data  = {64'h0, 64'h10, 64'h2000};
    mem_valid = 1; mem_taint = 1; mem_data = 64'h5EC12E7;
    #1;
    check("load gets dummy", mem_data_o, 64'd0);
    check("load not suppressed", 64'(suppress), 64'd0);
    // its dependant: shl with a tainted source
    mem_valid = 0; src_valid = 3'b001; src_taint = 3'b001; src_data[0] = 64'h5EC12E7;
    #1;
    check("dependant suppressed", 64'(suppress), 64'd1);
    check("dependant dummy", src_data_o[0], 64'd0);
    // same op, architectural: real value
    transient = 0;
    #1;
    check("architectural", src_data_o[0], 64'h5EC12E7);
    check("architectural not suppressed", 64'(suppress), 64'd0);

    for (int n = 0; n < 2000; n++) begin
      nt_enable = 1'($urandom); transient = 1'($urandom);
      src_valid = 3'($urandom); src_taint = 3'($urandom);
      for (int i = 0; i < NUM_SRC; i++) src_data[i] = {$urandom, $urandom};
      mem_valid = 1'($urandom); mem_taint = 1'($urandom); mem_data = {$urandom, $urandom};
      #1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
