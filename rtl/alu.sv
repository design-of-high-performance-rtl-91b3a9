// alu: the arithmetic/logic unit of the EXE stage.
//
// Additions, subtractions and the set-less-than comparisons all go through
// one hybrid carry-skip/carry-select adder (subtraction as a + ~b + 1).
// Signed less-than is the sign of the difference corrected for overflow,
// unsigned less-than is the missing carry out. Shifts take their amount from
// the instruction's shamt field; LUI places the immediate in the upper half.
// Combinational. Arithmetic overflow raises no exception.
//
// The paper gives the ALU only as a block with its adder; the operation set
// is the usual MIPS-I integer subset, which covers the paper's programs.
module alu
  import mips_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [4:0]  shamt,
  output logic [31:0] y
);
  logic        sub;
  logic [31:0] bb, s;
  logic        co, ovf;

  assign sub = (op == ALU_SUB) || (op == ALU_SLT) || (op == ALU_SLTU);
  assign bb  = sub ? ~b : b;

  hybrid_adder #(.WIDTH(32), .BLOCK(4)) u_add (
    .a(a), .b(bb), .cin(sub), .sum(s), .cout(co)
  );

  assign ovf = (a[31] == bb[31]) && (s[31] != a[31]);

  always_comb begin
    unique case (op)
      ALU_ADD, ALU_SUB: y = s;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_NOR:  y = ~(a | b);
      ALU_SLT:  y = {31'd0, s[31] ^ ovf};
      ALU_SLTU: y = {31'd0, ~co};
      ALU_SLL:  y = b << shamt;
      ALU_SRL:  y = b >> shamt;
      ALU_SRA:  y = $signed(b) >>> shamt;
      ALU_LUI:  y = {b[15:0], 16'd0};
      default:  y = s;
    endcase
  end
endmodule
