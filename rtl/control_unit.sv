// control_unit: instruction decoder of the ID stage.
//
// Maps the opcode (and the function field of R-type words) to the control
// word of mips_pkg. It decodes the MIPS-I integer subset used here plus the
// two additions: the key load (opcode 0x3E, a load whose result goes to the
// key register instead of the register file) and CRYPT (opcode 0x3F, which
// the pipeline uses to set its cipher enable, CryptEn in the paper's block
// diagram). Unknown words decode to a no-operation. Combinational.
module control_unit
  import mips_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [5:0] op, fn;
  assign op = instr[31:26];
  assign fn = instr[5:0];

  always_comb begin
    ctrl = CTRL_NOP;
    unique case (op)
      OP_RTYPE: begin
        ctrl.reg_write  = 1'b1;
        ctrl.reg_dst_rd = 1'b1;
        ctrl.uses_rs    = 1'b1;
        ctrl.uses_rt    = 1'b1;
        unique case (fn)
          FN_SLL:          begin ctrl.alu_op = ALU_SLL; ctrl.uses_rs = 1'b0; end
          FN_SRL:          begin ctrl.alu_op = ALU_SRL; ctrl.uses_rs = 1'b0; end
          FN_SRA:          begin ctrl.alu_op = ALU_SRA; ctrl.uses_rs = 1'b0; end
          FN_ADD, FN_ADDU: ctrl.alu_op = ALU_ADD;
          FN_SUB, FN_SUBU: ctrl.alu_op = ALU_SUB;
          FN_AND:          ctrl.alu_op = ALU_AND;
          FN_OR:           ctrl.alu_op = ALU_OR;
          FN_XOR:          ctrl.alu_op = ALU_XOR;
          FN_NOR:          ctrl.alu_op = ALU_NOR;
          FN_SLT:          ctrl.alu_op = ALU_SLT;
          FN_SLTU:         ctrl.alu_op = ALU_SLTU;
          default:         ctrl = CTRL_NOP;
        endcase
      end
      OP_ADDI, OP_ADDIU, OP_SLTI, OP_SLTIU, OP_ANDI, OP_ORI, OP_XORI, OP_LUI: begin
        ctrl.reg_write   = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs     = (op != OP_LUI);
        unique case (op)
          OP_SLTI:  ctrl.alu_op = ALU_SLT;
          OP_SLTIU: ctrl.alu_op = ALU_SLTU;
          OP_ANDI:  begin ctrl.alu_op = ALU_AND; ctrl.imm_zero_ext = 1'b1; end
          OP_ORI:   begin ctrl.alu_op = ALU_OR;  ctrl.imm_zero_ext = 1'b1; end
          OP_XORI:  begin ctrl.alu_op = ALU_XOR; ctrl.imm_zero_ext = 1'b1; end
          OP_LUI:   ctrl.alu_op = ALU_LUI;
          default:  ctrl.alu_op = ALU_ADD;
        endcase
      end
      OP_LW: begin
        ctrl.reg_write   = 1'b1;
        ctrl.mem_read    = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs     = 1'b1;
      end
      OP_SW: begin
        ctrl.mem_write   = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs     = 1'b1;
        ctrl.uses_rt     = 1'b1;
      end
      OP_LK: begin
        ctrl.mem_read    = 1'b1;
        ctrl.key_write   = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs     = 1'b1;
      end
      OP_BEQ, OP_BNE: begin
        ctrl.branch    = 1'b1;
        ctrl.branch_ne = (op == OP_BNE);
        ctrl.alu_op    = ALU_SUB;
        ctrl.uses_rs   = 1'b1;
        ctrl.uses_rt   = 1'b1;
      end
      OP_J:     ctrl.jump  = 1'b1;
      OP_CRYPT: ctrl.crypt = 1'b1;
      default:  ctrl = CTRL_NOP;
    endcase
  end
endmodule
