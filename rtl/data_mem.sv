// data_mem: data memory, BYTES bytes organised as 64-bit words.
//
// The processor port reads the 64-bit word at a byte address combinationally
// (address bits [2:0] ignored) and writes it at the clock edge under a
// two-bit half-word enable: cipher stores write the whole 64-bit block, plain
// stores one 32-bit half, selected by address bit 2. The external port is
// the 32-bit load bus used while the processor is held in reset; it has
// priority over the processor port. Bytes are little-endian within a word.
//
// The 64-bit width and the 1024-byte size follow the paper (memory[0:1023]
// in its simulation); the half-word enables and the port priority are this
// design's choices.
module data_mem #(
  parameter int unsigned BYTES = 1024,
  localparam int unsigned AW = $clog2(BYTES)
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output logic [63:0]   rdata,
  input  logic [1:0]    we,      // [1]: upper half, [0]: lower half
  input  logic [63:0]   wdata,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  logic [31:0]   ext_wdata,
  output logic [31:0]   ext_rdata
);
  localparam int unsigned WORDS = BYTES / 8;

  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (ext_we) begin
      if (ext_addr[2]) mem[ext_addr[AW-1:3]][63:32] <= ext_wdata;
      else             mem[ext_addr[AW-1:3]][31:0]  <= ext_wdata;
    end else begin
      if (we[0]) mem[addr[AW-1:3]][31:0]  <= wdata[31:0];
      if (we[1]) mem[addr[AW-1:3]][63:32] <= wdata[63:32];
    end
  end

  assign rdata     = mem[addr[AW-1:3]];
  assign ext_rdata = ext_addr[2] ? mem[ext_addr[AW-1:3]][63:32] : mem[ext_addr[AW-1:3]][31:0];
endmodule
