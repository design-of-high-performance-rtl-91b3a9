// control_unit_tb: decodes the instruction words of the paper's programs
// (and a few more) and checks the control word fields set for each.
module control_unit_tb;
  import mips_pkg::*;
  logic [31:0] instr;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  control_unit dut (.*);

  task automatic expect_ctrl(input logic [31:0] w, input ctrl_t e, input string what);
    instr = w;
    #1;
    checks++;
    if (ctrl !== e) begin
      failures++;
      $display("FAIL %s (%h): %p expected %p", what, w, ctrl, e);
    end
  endtask

  function automatic ctrl_t c(input logic rw, mr, mw, kw, imm, zx, rd, input alu_op_e op,
                              input logic br, bne, j, cr, urs, urt);
    return '{rw, mr, mw, kw, imm, zx, rd, op, br, bne, j, cr, urs, urt};
  endfunction

  initial begin
    expect_ctrl(32'h20010068, c(1,0,0,0,1,0,0,ALU_ADD, 0,0,0,0,1,0), "addi r1,r0,104");
    expect_ctrl(32'hf8200000, c(0,1,0,1,1,0,0,ALU_ADD, 0,0,0,0,1,0), "lklw 0(r1)");
    expect_ctrl(32'hf8250000, c(0,1,0,1,1,0,0,ALU_ADD, 0,0,0,0,1,0), "lkuw 0(r1), word 5");
    expect_ctrl(32'hfc000001, c(0,0,0,0,0,0,0,ALU_ADD, 0,0,0,1,0,0), "crypt 1");
    expect_ctrl(32'h00422820, c(1,0,0,0,0,0,1,ALU_ADD, 0,0,0,0,1,1), "add r5,r2,r2");
    expect_ctrl(32'h8ca60000, c(1,1,0,0,1,0,0,ALU_ADD, 0,0,0,0,1,0), "lw r6,0(r5)");
    expect_ctrl(32'h0041382a, c(1,0,0,0,0,0,1,ALU_SLT, 0,0,0,0,1,1), "slt r7,r2,r1");
    expect_ctrl(32'h10e00008, c(0,0,0,0,0,0,0,ALU_SUB, 1,0,0,0,1,1), "beq r7,r0");
    expect_ctrl(32'h14600008, c(0,0,0,0,0,0,0,ALU_SUB, 1,1,0,0,1,1), "bne r3,r0");
    expect_ctrl(32'h08000032, c(0,0,0,0,0,0,0,ALU_ADD, 0,0,1,0,0,0), "j 200");
    expect_ctrl(32'hac040038, c(0,0,1,0,1,0,0,ALU_ADD, 0,0,0,0,1,1), "sw r4,56(r0)");
    expect_ctrl(32'h00000000, c(1,0,0,0,0,0,1,ALU_SLL, 0,0,0,0,0,1), "nop (sll r0)");
    expect_ctrl(32'h3c011234, c(1,0,0,0,1,0,0,ALU_LUI, 0,0,0,0,0,0), "lui");
    expect_ctrl(32'h3421ffff, c(1,0,0,0,1,1,0,ALU_OR,  0,0,0,0,1,0), "ori");
    expect_ctrl(32'h00221823, c(1,0,0,0,0,0,1,ALU_SUB, 0,0,0,0,1,1), "subu");
    expect_ctrl(32'h00011083, c(1,0,0,0,0,0,1,ALU_SRA, 0,0,0,0,0,1), "sra");
    expect_ctrl(32'h7c000000, CTRL_NOP, "unknown opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
