// instr_mem: instruction memory, BYTES bytes organised as 64-bit words.
//
// The fetch port reads the whole 64-bit block at a byte address (address bits
// [2:0] ignored) combinationally, as distributed RAM would. Blocks hold one
// 32-bit instruction in the low word, zero padded, either in clear or as a
// Triple-DES cipher block; bytes are little-endian within a block. The load
// port is the external 32-bit bus: it writes or reads the 32-bit half word
// at ext_addr (bit 2 selects the half) while the processor is held in
// reset. Writes take effect at the clock edge.
//
// The 64-bit width, the 1024-byte size (10-bit address bus) and the
// external loading during reset follow the paper; the half-word organisation
// of the load port is this design's choice.
module instr_mem #(
  parameter int unsigned BYTES = 1024,
  localparam int unsigned AW = $clog2(BYTES)
) (
  input  logic          clk,
  input  logic [AW-1:0] fetch_addr,
  output logic [63:0]   fetch_data,
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
    end
  end

  assign fetch_data = mem[fetch_addr[AW-1:3]];
  assign ext_rdata  = ext_addr[2] ? mem[ext_addr[AW-1:3]][63:32] : mem[ext_addr[AW-1:3]][31:0];
endmodule
