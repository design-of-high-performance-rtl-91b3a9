// forwarding_unit: operand bypass selection for the EXE stage.
//
// For each source register of the instruction in EXE it selects the newest
// value in flight: the ALU result of the instruction in MEM if that one
// writes the register (and is not a load, whose data is not ready yet), else
// the write-back value of the instruction in WB, else the value read from the
// register file in ID. Register 0 is never forwarded. The same selection feeds
// the ALU, the branch comparison, the store data and the base address of the
// key load instructions. Combinational.
module forwarding_unit
  import mips_pkg::*;
(
  input  logic [4:0] ex_rs,
  input  logic [4:0] ex_rt,
  input  logic       mem_reg_write,
  input  logic       mem_load,
  input  logic [4:0] mem_dest,
  input  logic       wb_reg_write,
  input  logic [4:0] wb_dest,
  output fwd_e       fwd_a,
  output fwd_e       fwd_b
);
  function automatic fwd_e pick(input logic [4:0] src);
    if (src == 5'd0)                                      return FWD_NONE;
    if (mem_reg_write && !mem_load && mem_dest == src)    return FWD_EXMEM;
    if (wb_reg_write && wb_dest == src)                   return FWD_MEMWB;
    return FWD_NONE;
  endfunction

  assign fwd_a = pick(ex_rs);
  assign fwd_b = pick(ex_rt);
endmodule
