// key_register: the three 64-bit Triple-DES keys, held as six 32-bit words.
//
// A key load instruction (LKLW/LKUW) writes one word from the WB stage:
// word index w selects key w/2 + 1, the lower half for even w and the upper
// half for odd w (index 0 = key1 low ... 5 = key3 high). All three keys are
// continuously available to the cipher cores of the IF and MEM stages.
// Writes take effect at the clock edge; reset clears the keys.
//
// Word-wise loading from the write-back stage follows the paper; the index
// mapping is the one implied by the paper's program dump, where consecutive
// key loads carry rt = 0 .. 5 for the keys at data addresses 104 .. 144.
module key_register (
  input  logic        clk,
  input  logic        rst,
  input  logic        we,
  input  logic [2:0]  idx,
  input  logic [31:0] wdata,
  output logic [63:0] key1,
  output logic [63:0] key2,
  output logic [63:0] key3
);
  logic [31:0] w [6];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 6; i++) w[i] <= '0;
    end else if (we && idx < 3'd6) begin
      w[idx] <= wdata;
    end
  end

  assign key1 = {w[1], w[0]};
  assign key2 = {w[3], w[2]};
  assign key3 = {w[5], w[4]};
endmodule
