// mips_crypto: 32-bit five-stage pipelined MIPS processor with Triple-DES
// ciphers on its instruction fetch and data memory paths.
//
// Stages: IF (fetch_stage: PC, instruction memory, instruction cipher),
// ID (control_unit, regfile, key_register, hazard_detector, jump
// resolution), EXE (alu, forwarding_unit, branch resolution), MEM
// (mem_stage: data memory with store and load ciphers) and WB (wb_stage).
// The pipeline registers IF/ID, ID/EX, EX/MEM and MEM/WB live here.
//
// Cipher mode: CRYPT n, decoded in ID, sets the mode register (CryptEn) to
// n != 0. The fetch of the block right behind CRYPT already sees the new
// mode, so a program switches from clear to enciphered code exactly at the
// block after CRYPT. Loads and stores carry the mode they had in ID. Keys
// are written word by word by the key load instructions in WB; as in the
// paper, software places NOPs between the last key load and CRYPT so the
// keys are complete before they are used.
//
// Hazards and stalls, in priority order:
//  * a cipher access in MEM holds IF, IF/ID, ID/EX and EX/MEM for the
//    cipher latency and sends bubbles into MEM/WB; the operands held in
//    ID/EX are refreshed from the forwarding network meanwhile, so a
//    producer that retires during the stall is not lost;
//  * load-use: one-cycle stall of PC and IF/ID, bubble into ID/EX;
//  * a taken branch (BEQ/BNE, resolved in EXE) redirects the PC and flushes
//    IF/ID and ID/EX (two-cycle penalty); a jump (J, resolved in ID)
//    redirects and flushes IF/ID (one cycle). Fall-through is assumed, so
//    there are no delay slots;
//  * a fetch waiting for the instruction cipher sends bubbles into IF/ID.
// Results are forwarded from EX/MEM and MEM/WB into EXE; the register file
// writes through, covering WB to ID.
//
// Branch and jump targets, taken from the paper's program dump: a branch
// goes to PC + 8 + sign-extended offset (offset in bytes), a jump to
// {PC[31:28], target, 2'b00}.
//
// External bus: while rst is high the processor is in its load mode and the
// host can write or read the instruction and data memories, 32 bits at a
// time, over ext_addr (10 bits for 1 KiB memories), ext_wdata/ext_rdata
// (the paper's bidirectional data bus, split in two) and four control
// signals: ext_we, ext_re, ext_imem, ext_dmem. Reset is synchronous and
// active high and clears PC, pipeline, registers and keys, not the memories.
module mips_crypto
  import mips_pkg::*;
#(
  parameter bit          ENCRYPTED  = 1'b1,  // 1: encrypted processor, 0: decrypted processor
  parameter int unsigned RPC        = 2,     // DES rounds per cycle in every cipher core
  parameter int unsigned IMEM_BYTES = 1024,
  parameter int unsigned DMEM_BYTES = 1024,
  localparam int unsigned AW = $clog2(IMEM_BYTES > DMEM_BYTES ? IMEM_BYTES : DMEM_BYTES)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] ext_addr,
  input  logic [31:0]   ext_wdata,
  output logic [31:0]   ext_rdata,
  input  logic          ext_we,
  input  logic          ext_re,
  input  logic          ext_imem,
  input  logic          ext_dmem,
  output logic          crypt_en     // current cipher mode (CryptEn)
);
  localparam int unsigned IAW = $clog2(IMEM_BYTES);
  localparam int unsigned DAW = $clog2(DMEM_BYTES);

  // ---------------------------------------------------------------- types
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
  } if_id_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic        cipher;
    logic [4:0]  rs, rt, dest, shamt;
    logic [31:0] rs_val, rt_val, imm, br_target;
  } id_ex_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write, mem_read, mem_write, key_write, cipher;
    logic [4:0]  dest;
    logic [2:0]  key_idx;
    logic [31:0] alu_y, store_data;
  } ex_mem_t;

  typedef struct packed {
    logic        valid;
    logic        reg_write, key_write, mem_to_reg;
    logic [4:0]  dest;
    logic [2:0]  key_idx;
    logic [31:0] alu_y, mem_data;
  } mem_wb_t;

  if_id_t  ifid;
  id_ex_t  idex;
  ex_mem_t exmem;
  mem_wb_t memwb;

  logic [63:0] key1, key2, key3;
  logic        crypt_q;

  // ---------------------------------------------------------------- hazard / stall signals
  logic mem_busy, load_use, ex_taken, id_jump, redirect;
  logic [31:0] redirect_pc, jump_target;

  // ---------------------------------------------------------------- IF
  logic        f_valid, f_busy, f_take, f_crypt;
  logic [31:0] f_instr, f_pc, imem_ext_rdata, dmem_ext_rdata;
  logic        ext_load;

  assign ext_load = rst && ext_we;

  fetch_stage #(.ENCRYPTED(ENCRYPTED), .RPC(RPC), .IMEM_BYTES(IMEM_BYTES)) u_if (
    .clk(clk), .rst(rst), .crypt_en(f_crypt), .key1(key1), .key2(key2), .key3(key3),
    .take(f_take), .redirect(redirect), .redirect_pc(redirect_pc),
    .valid(f_valid), .instr(f_instr), .pc(f_pc), .cipher_busy(f_busy),
    .ext_we(ext_load && ext_imem), .ext_addr(ext_addr[IAW-1:0]), .ext_wdata(ext_wdata),
    .ext_rdata(imem_ext_rdata)
  );

  // ---------------------------------------------------------------- ID
  ctrl_t       id_ctrl;
  logic [4:0]  id_rs, id_rt, id_rd;
  logic [31:0] id_rs_val, id_rt_val, id_imm;
  logic        id_crypt_arg;

  logic        rf_we, key_we;
  logic [4:0]  rf_waddr;
  logic [31:0] rf_wdata, key_wdata;
  logic [2:0]  key_widx;

  control_unit u_ctrl (.instr(ifid.instr), .ctrl(id_ctrl));

  assign id_rs = ifid.instr[25:21];
  assign id_rt = ifid.instr[20:16];
  assign id_rd = ifid.instr[15:11];
  assign id_imm = id_ctrl.imm_zero_ext ? {16'd0, ifid.instr[15:0]}
                                       : {{16{ifid.instr[15]}}, ifid.instr[15:0]};
  assign id_crypt_arg = |ifid.instr[25:0];
  assign jump_target  = {ifid.pc[31:28], ifid.instr[25:0], 2'b00};

  regfile u_rf (
    .clk(clk), .rst(rst), .raddr1(id_rs), .raddr2(id_rt), .rdata1(id_rs_val), .rdata2(id_rt_val),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata)
  );

  key_register u_keys (
    .clk(clk), .rst(rst), .we(key_we), .idx(key_widx), .wdata(key_wdata),
    .key1(key1), .key2(key2), .key3(key3)
  );

  hazard_detector u_hz (
    .id_valid(ifid.valid), .id_rs(id_rs), .id_rt(id_rt),
    .id_uses_rs(id_ctrl.uses_rs), .id_uses_rt(id_ctrl.uses_rt),
    .ex_valid(idex.valid), .ex_load(idex.ctrl.mem_read && idex.ctrl.reg_write),
    .ex_dest(idex.dest), .stall(load_use)
  );

  // Cipher mode register; the fetch sees a CRYPT that sits in ID.
  assign f_crypt  = (ifid.valid && id_ctrl.crypt) ? id_crypt_arg : crypt_q;
  assign crypt_en = crypt_q;

  // ---------------------------------------------------------------- EXE
  fwd_e        fwd_a, fwd_b;
  logic [31:0] ex_a, ex_b_reg, ex_b, ex_y;

  forwarding_unit u_fwd (
    .ex_rs(idex.rs), .ex_rt(idex.rt),
    .mem_reg_write(exmem.valid && exmem.reg_write), .mem_load(exmem.mem_read), .mem_dest(exmem.dest),
    .wb_reg_write(rf_we), .wb_dest(rf_waddr),
    .fwd_a(fwd_a), .fwd_b(fwd_b)
  );

  always_comb begin
    unique case (fwd_a)
      FWD_EXMEM: ex_a = exmem.alu_y;
      FWD_MEMWB: ex_a = rf_wdata;
      default:   ex_a = idex.rs_val;
    endcase
    unique case (fwd_b)
      FWD_EXMEM: ex_b_reg = exmem.alu_y;
      FWD_MEMWB: ex_b_reg = rf_wdata;
      default:   ex_b_reg = idex.rt_val;
    endcase
  end

  assign ex_b = idex.ctrl.alu_src_imm ? idex.imm : ex_b_reg;

  alu u_alu (.op(idex.ctrl.alu_op), .a(ex_a), .b(ex_b), .shamt(idex.shamt), .y(ex_y));

  assign ex_taken = idex.valid && idex.ctrl.branch && ((ex_a == ex_b_reg) ^ idex.ctrl.branch_ne);

  // ---------------------------------------------------------------- MEM
  logic [31:0] mem_load_data;

  mem_stage #(.ENCRYPTED(ENCRYPTED), .RPC(RPC), .DMEM_BYTES(DMEM_BYTES)) u_mem (
    .clk(clk), .rst(rst), .valid(exmem.valid), .mem_read(exmem.mem_read),
    .mem_write(exmem.mem_write), .key_load(exmem.key_write), .cipher(exmem.cipher),
    .addr(exmem.alu_y), .store_data(exmem.store_data),
    .key1(key1), .key2(key2), .key3(key3), .load_data(mem_load_data), .busy(mem_busy),
    .ext_we(ext_load && ext_dmem), .ext_addr(ext_addr[DAW-1:0]), .ext_wdata(ext_wdata),
    .ext_rdata(dmem_ext_rdata)
  );

  // ---------------------------------------------------------------- WB
  wb_stage u_wb (
    .valid(memwb.valid), .reg_write(memwb.reg_write), .key_write(memwb.key_write),
    .mem_to_reg(memwb.mem_to_reg), .dest(memwb.dest), .key_idx(memwb.key_idx),
    .alu_result(memwb.alu_y), .mem_data(memwb.mem_data),
    .rf_we(rf_we), .rf_waddr(rf_waddr), .rf_wdata(rf_wdata),
    .key_we(key_we), .key_widx(key_widx), .key_wdata(key_wdata)
  );

  // ---------------------------------------------------------------- control of the flow
  logic front_hold;
  assign front_hold  = mem_busy || load_use;
  assign id_jump     = ifid.valid && id_ctrl.jump && !front_hold && !ex_taken;
  assign redirect    = (ex_taken && !mem_busy) || id_jump;
  assign redirect_pc = (ex_taken && !mem_busy) ? idex.br_target : jump_target;
  assign f_take      = !front_hold && !redirect;

  always_ff @(posedge clk) begin
    if (rst) begin
      ifid    <= '0;
      idex    <= '0;
      exmem   <= '0;
      memwb   <= '0;
      crypt_q <= 1'b0;
    end else begin
      // IF/ID
      if (!front_hold) begin
        if (redirect) ifid <= '0;
        else          ifid <= '{valid: f_valid, pc: f_pc, instr: f_instr};
      end

      // cipher mode register
      if (ifid.valid && id_ctrl.crypt && !front_hold && !(ex_taken && !mem_busy))
        crypt_q <= id_crypt_arg;

      // ID/EX
      if (mem_busy) begin
        idex.rs_val <= ex_a;       // keep operands current while held
        idex.rt_val <= ex_b_reg;
      end else if (load_use || ex_taken) begin
        idex <= '0;
      end else begin
        idex.valid     <= ifid.valid;
        idex.ctrl      <= ifid.valid ? id_ctrl : CTRL_NOP;
        idex.cipher    <= crypt_q;
        idex.rs        <= id_rs;
        idex.rt        <= id_rt;
        idex.dest      <= id_ctrl.reg_dst_rd ? id_rd : id_rt;
        idex.shamt     <= ifid.instr[10:6];
        idex.rs_val    <= id_rs_val;
        idex.rt_val    <= id_rt_val;
        idex.imm       <= id_imm;
        idex.br_target <= ifid.pc + 32'd8 + id_imm;
      end

      // EX/MEM
      if (!mem_busy) begin
        exmem.valid      <= idex.valid;
        exmem.reg_write  <= idex.ctrl.reg_write;
        exmem.mem_read   <= idex.ctrl.mem_read;
        exmem.mem_write  <= idex.ctrl.mem_write;
        exmem.key_write  <= idex.ctrl.key_write;
        exmem.cipher     <= idex.cipher;
        exmem.dest       <= idex.dest;
        exmem.key_idx    <= idex.rt[2:0];
        exmem.alu_y      <= ex_y;
        exmem.store_data <= ex_b_reg;
      end

      // MEM/WB
      if (mem_busy) begin
        memwb.valid <= 1'b0;
      end else begin
        memwb.valid      <= exmem.valid;
        memwb.reg_write  <= exmem.reg_write;
        memwb.key_write  <= exmem.key_write;
        memwb.mem_to_reg <= exmem.mem_read;
        memwb.dest       <= exmem.dest;
        memwb.key_idx    <= exmem.key_idx;
        memwb.alu_y      <= exmem.alu_y;
        memwb.mem_data   <= mem_load_data;
      end
    end
  end

  // External read-back (load mode only).
  assign ext_rdata = !(rst && ext_re) ? '0 :
                     ext_imem ? imem_ext_rdata :
                     ext_dmem ? dmem_ext_rdata : '0;

  // A stalled MEM stage must see a stable instruction.
  property p_mem_hold;
    @(posedge clk) disable iff (rst) mem_busy |=> $stable(exmem);
  endproperty
  assert property (p_mem_hold);
endmodule
