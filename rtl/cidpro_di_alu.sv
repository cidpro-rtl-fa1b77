// cidpro_di_alu -- diversifying ALU (Di-ALU) of the CIDPro co-processor.
//
// One arithmetic unit serves all diversified instances of an operation: the
// instances differ only in how long the co-processor waits before returning
// the result, never in the result itself. The paper names ADD and MUL as the
// kind of operation a custom instruction performs and maps them onto the
// FPGA's DSP blocks; this design implements exactly those two:
//   OP_ADD : y = a + b             (mod 2^XLEN)
//   OP_MUL : y = low XLEN bits of a * b
// Any other operation code returns 0. Combinational; the co-processor holds
// its operands in registers for the whole instruction, so the result is
// settled by the first cycle it may be returned in.
module cidpro_di_alu
  import cidpro_pkg::*;
#(
  parameter int unsigned W = cidpro_pkg::XLEN
) (
  input  alu_op_e      op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);

  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_MUL:  y = a * b;
      default: y = '0;
    endcase
  end

endmodule
