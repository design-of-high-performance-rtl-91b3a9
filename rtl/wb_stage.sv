// wb_stage: write-back (WB) selection.
//
// Picks the value that returns to the register file, the loaded word for a
// load and the ALU result otherwise (the paper's write-back multiplexer),
// and routes a key load's word to the key register instead, with the key
// word index taken from the rt field ("key address and key data come from
// the write-back stage"). Combinational; the writes happen at the clock
// edge inside the register file and key register.
module wb_stage (
  input  logic        valid,
  input  logic        reg_write,
  input  logic        key_write,
  input  logic        mem_to_reg,
  input  logic [4:0]  dest,
  input  logic [2:0]  key_idx,
  input  logic [31:0] alu_result,
  input  logic [31:0] mem_data,
  output logic        rf_we,
  output logic [4:0]  rf_waddr,
  output logic [31:0] rf_wdata,
  output logic        key_we,
  output logic [2:0]  key_widx,
  output logic [31:0] key_wdata
);
  assign rf_we     = valid && reg_write;
  assign rf_waddr  = dest;
  assign rf_wdata  = mem_to_reg ? mem_data : alu_result;
  assign key_we    = valid && key_write;
  assign key_widx  = key_idx;
  assign key_wdata = mem_data;
endmodule
