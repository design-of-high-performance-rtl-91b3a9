// mem_stage: memory access unit (MEM) with the data ciphers.
//
// Holds the data memory and two Triple-DES cores, one on the store path
// ahead of the memory and one on the load path behind it, with the
// multiplexer and demultiplexer that route around them, as in the paper's
// block diagram. Cipher accesses move whole 64-bit blocks: a store in cipher
// mode zero-extends the 32-bit register value to 64 bits, runs it through
// the store core and writes the block; a load in cipher mode runs the 64-bit
// block through the load core and returns its low word. In the encrypted
// processor (ENCRYPTED = 1) stores encrypt and loads decrypt; in the
// decrypted processor the directions are swapped. Plain loads and stores
// move the 32-bit half word selected by address bit 2. Key loads are always
// plain, as the keys are stored in clear.
//
// Timing: a plain access completes in its cycle. A cipher access keeps
// 'busy' high for 1 + 48 / RPC cycles while the rest of the pipeline holds;
// the cipher store writes memory at the edge that ends the busy period, and
// the cipher load result is valid in the last cycle. 'cipher' must be stable
// while the access is in MEM, which the pipeline guarantees by holding
// EX/MEM while busy.
//
// What follows the paper: the three cores of the figure, the store and load
// directions, the 64-bit block per access. The stall handshake and the
// half-word plain accesses are this design's choices.
module mem_stage #(
  parameter bit          ENCRYPTED  = 1'b1,
  parameter int unsigned RPC        = 2,
  parameter int unsigned DMEM_BYTES = 1024,
  localparam int unsigned AW = $clog2(DMEM_BYTES)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          valid,
  input  logic          mem_read,
  input  logic          mem_write,
  input  logic          key_load,
  input  logic          cipher,       // cipher mode of this instruction
  input  logic [31:0]   addr,
  input  logic [31:0]   store_data,
  input  logic [63:0]   key1,
  input  logic [63:0]   key2,
  input  logic [63:0]   key3,
  output logic [31:0]   load_data,
  output logic          busy,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  logic [31:0]   ext_wdata,
  output logic [31:0]   ext_rdata
);
  logic        cop;           // cipher access in MEM
  logic        req_q;         // core started for it
  logic        st_done, ld_done, start;
  logic [63:0] rdata, st_out, ld_out, wdata;
  logic [1:0]  we;

  assign cop   = valid && cipher && !key_load && (mem_read || mem_write);
  assign start = cop && !req_q;
  assign busy  = cop && !(req_q && (mem_write ? st_done : ld_done));

  always_ff @(posedge clk) begin
    if (rst || !busy) req_q <= 1'b0;
    else if (start)   req_q <= 1'b1;
  end

  // Store path cipher (ahead of the memory).
  tdes_core #(.RPC(RPC)) u_store_core (
    .clk(clk), .rst(rst), .start(start && mem_write), .decrypt(!ENCRYPTED),
    .din({32'd0, store_data}), .key1(key1), .key2(key2), .key3(key3),
    .dout(st_out), .done(st_done)
  );

  // Load path cipher (behind the memory).
  tdes_core #(.RPC(RPC)) u_load_core (
    .clk(clk), .rst(rst), .start(start && mem_read), .decrypt(ENCRYPTED),
    .din(rdata), .key1(key1), .key2(key2), .key3(key3),
    .dout(ld_out), .done(ld_done)
  );

  // Store multiplexer and write enables.
  always_comb begin
    we    = 2'b00;
    wdata = {store_data, store_data};
    if (valid && mem_write) begin
      if (cop) begin
        wdata = st_out;
        if (req_q && st_done) we = 2'b11;
      end else begin
        we = addr[2] ? 2'b10 : 2'b01;
      end
    end
  end

  data_mem #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk(clk), .addr(addr[AW-1:0]), .rdata(rdata), .we(we), .wdata(wdata),
    .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata), .ext_rdata(ext_rdata)
  );

  // Load demultiplexer: through the cipher or straight to MEM/WB.
  assign load_data = cop ? ld_out[31:0] : (addr[2] ? rdata[63:32] : rdata[31:0]);
endmodule
