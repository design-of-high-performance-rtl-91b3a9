// fetch_stage: instruction fetch unit (IF) with the instruction cipher.
//
// Holds the program counter, the instruction memory, one Triple-DES core and
// the bypass multiplexer of the paper's block diagram. Every fetch reads one
// 64-bit block; the PC advances by 8. The instruction is the low word of the
// block, taken directly when the cipher mode is off and from the output of
// the core when it is on. In the encrypted processor (ENCRYPTED = 1) the
// core decrypts the stored blocks; in the decrypted processor
// (ENCRYPTED = 0) the stored blocks are such that the core encrypts them.
//
// Handshake with the pipeline: 'valid' says 'instr' and 'pc' hold a usable
// instruction; the pipeline takes it by raising 'take' in that cycle.
// 'redirect' loads a new PC (taken branch or jump) and drops any cipher run
// in progress. In plain mode a fetch is valid at once (one instruction per
// cycle). In cipher mode the core is started in the first cycle at a new PC
// and the instruction becomes valid when it is done, 1 + 48 / RPC cycles
// later; the front of the pipeline waits meanwhile.
//
// The blocks, the 64-bit fetch and the PC step of 8 follow the paper. The
// paper also says two instructions are packed per block; its own memory dump
// holds one instruction per block, zero padded, and that is what is
// implemented. The start/valid handshake is this design's choice.
module fetch_stage #(
  parameter bit          ENCRYPTED = 1'b1,
  parameter int unsigned RPC       = 2,
  parameter int unsigned IMEM_BYTES = 1024,
  localparam int unsigned AW = $clog2(IMEM_BYTES)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          crypt_en,     // cipher mode for this fetch
  input  logic [63:0]   key1,
  input  logic [63:0]   key2,
  input  logic [63:0]   key3,
  input  logic          take,
  input  logic          redirect,
  input  logic [31:0]   redirect_pc,
  output logic          valid,
  output logic [31:0]   instr,
  output logic [31:0]   pc,
  output logic          cipher_busy,  // waiting for the core (for statistics)
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  logic [31:0]   ext_wdata,
  output logic [31:0]   ext_rdata
);
  logic [31:0] pc_q;
  logic        req_q;        // core started for the current PC
  logic [63:0] block, core_out;
  logic        core_done, core_start;

  instr_mem #(.BYTES(IMEM_BYTES)) u_imem (
    .clk       (clk),
    .fetch_addr(pc_q[AW-1:0]),
    .fetch_data(block),
    .ext_we    (ext_we),
    .ext_addr  (ext_addr),
    .ext_wdata (ext_wdata),
    .ext_rdata (ext_rdata)
  );

  assign core_start = crypt_en && !req_q && !redirect;

  tdes_core #(.RPC(RPC)) u_core (
    .clk    (clk),
    .rst    (rst),
    .start  (core_start),
    .decrypt(ENCRYPTED),
    .din    (block),
    .key1   (key1),
    .key2   (key2),
    .key3   (key3),
    .dout   (core_out),
    .done   (core_done)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_q  <= '0;
      req_q <= 1'b0;
    end else if (redirect) begin
      pc_q  <= redirect_pc;
      req_q <= 1'b0;
    end else if (take && valid) begin
      pc_q  <= pc_q + 32'd8;
      req_q <= 1'b0;
    end else if (core_start) begin
      req_q <= 1'b1;
    end
  end

  // Bypass multiplexer: clear block or cipher core output.
  assign valid       = crypt_en ? (req_q && core_done) : 1'b1;
  assign instr       = crypt_en ? core_out[31:0] : block[31:0];
  assign pc          = pc_q;
  assign cipher_busy = crypt_en && !valid;
endmodule
