// nt_operand_gate: the change to the operand path that keeps secrets out of
// transient execution.
//
// A micro-op that executes transiently (under a prediction or a fault that
// has not been resolved) must not receive a non-transient value. For every
// register operand whose taint bit is set, and for a memory operand that is
// tainted (non-transient page, or tainted cache word), the gate delivers the
// dummy value DUMMY instead of the real one. A micro-op with a tainted
// register source is in addition reported as `suppress`: it depends on a
// secret and must not be executed until it is no longer transient. A load
// from non-transient memory is not suppressed for that reason alone; it
// completes with the dummy value and taints its destination, so that the
// instructions after it are the ones held back.
//
// The gate only acts while ConTExT is enabled (nt_enable) and the micro-op
// is transient; a non-transient (architectural) micro-op always gets the
// real values. Purely combinational.
//
// From the paper: the dummy value (0 by default), the register and memory
// cases, and that dependent transient operations are not executed. Chosen
// here: splitting the two reactions between register and memory operands.
module nt_operand_gate
  import contxt_pkg::*;
#(
  parameter int unsigned       DATA_W = 64,
  parameter logic [DATA_W-1:0] DUMMY  = '0
) (
  input  logic                           nt_enable,
  input  logic                           transient,
  input  logic [NUM_SRC-1:0]             src_valid,
  input  logic [NUM_SRC-1:0]             src_taint,
  input  logic [NUM_SRC-1:0][DATA_W-1:0] src_data,
  input  logic                           mem_valid,
  input  logic                           mem_taint,
  input  logic [DATA_W-1:0]              mem_data,
  output logic [NUM_SRC-1:0][DATA_W-1:0] src_data_o,
  output logic [DATA_W-1:0]              mem_data_o,
  output logic [NUM_SRC-1:0]             src_masked,
  output logic                           mem_masked,
  output logic                           suppress
);
  logic guard;
  assign guard = nt_enable & transient;

  always_comb begin
    for (int unsigned i = 0; i < NUM_SRC; i++) begin
      src_masked[i] = guard & src_valid[i] & src_taint[i];
      src_data_o[i] = src_masked[i] ? DUMMY : src_data[i];
    end
    mem_masked = guard & mem_valid & mem_taint;
    mem_data_o = mem_masked ? DUMMY : mem_data;
    suppress   = |src_masked;
  end

endmodule
