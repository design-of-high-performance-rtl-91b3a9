// mips_pkg: instruction encodings, ALU operations and the decoded control
// word shared by the stages of the crypto MIPS pipeline.
//
// The standard MIPS-I opcodes and function codes are used for the ordinary
// instructions. The two added ones take the top opcodes: 0x3E is the key load
// (LKLW/LKUW, I-type, rt selects which 32-bit key word is written) and 0x3F is
// CRYPT (J-type, a non-zero 26-bit argument switches the ciphers on). Both
// encodings are the ones found in the paper's instruction memory dump.
package mips_pkg;

  typedef enum logic [5:0] {
    OP_RTYPE = 6'h00,
    OP_J     = 6'h02,
    OP_BEQ   = 6'h04,
    OP_BNE   = 6'h05,
    OP_ADDI  = 6'h08,
    OP_ADDIU = 6'h09,
    OP_SLTI  = 6'h0A,
    OP_SLTIU = 6'h0B,
    OP_ANDI  = 6'h0C,
    OP_ORI   = 6'h0D,
    OP_XORI  = 6'h0E,
    OP_LUI   = 6'h0F,
    OP_LW    = 6'h23,
    OP_SW    = 6'h2B,
    OP_LK    = 6'h3E,   // LKLW / LKUW: key word rt <= mem[rs + imm]
    OP_CRYPT = 6'h3F    // CRYPT n: cipher mode <= (n != 0)
  } opcode_e;

  typedef enum logic [5:0] {
    FN_SLL  = 6'h00,
    FN_SRL  = 6'h02,
    FN_SRA  = 6'h03,
    FN_ADD  = 6'h20,
    FN_ADDU = 6'h21,
    FN_SUB  = 6'h22,
    FN_SUBU = 6'h23,
    FN_AND  = 6'h24,
    FN_OR   = 6'h25,
    FN_XOR  = 6'h26,
    FN_NOR  = 6'h27,
    FN_SLT  = 6'h2A,
    FN_SLTU = 6'h2B
  } funct_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR,
    ALU_SLT, ALU_SLTU, ALU_SLL, ALU_SRL, ALU_SRA, ALU_LUI
  } alu_op_e;

  // Decoded control word (all zero = no operation).
  typedef struct packed {
    logic    reg_write;    // result goes to register file
    logic    mem_read;     // LW or key load reads data memory
    logic    mem_write;    // SW
    logic    key_write;    // key load: result goes to key register
    logic    alu_src_imm;  // ALU operand B is the immediate
    logic    imm_zero_ext; // immediate is zero-extended (logical ops)
    logic    reg_dst_rd;   // destination is rd (R-type) rather than rt
    alu_op_e alu_op;
    logic    branch;       // BEQ / BNE, resolved in EXE
    logic    branch_ne;    // BNE
    logic    jump;         // J, resolved in ID
    logic    crypt;        // CRYPT
    logic    uses_rs;      // reads rs (for the hazard detector)
    logic    uses_rt;      // reads rt
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '0;

  // Forwarding selections for an EXE operand.
  typedef enum logic [1:0] {
    FWD_NONE  = 2'd0,  // value read from the register file
    FWD_EXMEM = 2'd1,  // ALU result of the instruction in MEM
    FWD_MEMWB = 2'd2   // write-back value of the instruction in WB
  } fwd_e;

endpackage
