// alu: the compute unit's 16-bit ALU.
//
// Combinational. Takes the two operands I1/I2 of an active message and its
// 3-bit opcode and returns the result that replaces the message's Op1 field.
// Operands are treated as unsigned INT16. Supported: ADD, SUB, MUL (low 16
// bits of the product), DIV (a / b, all ones when b is zero), AND and MIN.
// The published design lists arithmetic, logic, multiplication and division;
// the exact operation set, the MIN operation and the divide-by-zero value are
// this design's choices. Memory opcodes (LOAD, STREAM) pass operand a through.
module alu
  import nm_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  opcode_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y
);
  logic [W-1:0] prod;
  assign prod = a * b;  // low half of the product

  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_MUL:  y = prod;
      OP_DIV:  y = (b == '0) ? '1 : a / b;
      OP_AND:  y = a & b;
      OP_MIN:  y = (a < b) ? a : b;
      default: y = a;
    endcase
  end
endmodule
