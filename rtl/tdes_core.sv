// tdes_core: iterative Triple-DES (EDE) block cipher.
//
// Function: dout = E_K3(D_K2(E_K1(din))) when decrypt = 0, and
// dout = D_K1(E_K2(D_K3(din))) when decrypt = 1 (keying option of
// NIST SP 800-67). The three DES passes are run as one chain of 48 Feistel
// rounds on a single 64-bit state register: the initial permutation is applied
// when the block is loaded, the halves are swapped at the two pass boundaries
// (the final permutation of one DES pass cancels the initial permutation of the
// next), and the final permutation is applied on the way out. Subkeys are
// derived on the fly from the selected key and the round number, so no key
// schedule is stored.
//
// Interface: pulse 'start' for one cycle with din and decrypt valid; the block
// and the mode are captured on that edge. The keys are read while the core
// runs and must stay constant until 'done'. 'done' rises with the 48 / RPC-th
// clock edge after the edge that samples start (24 at the default RPC = 2),
// so a result is usable 25 cycles after start is raised; it stays high, with
// dout valid, until the next start. A start while busy restarts the core.
//
// The port list (64-bit text, three 64-bit keys, start, encrypt/decrypt
// select, 64-bit output) is the one the paper gives for its core. How the
// core is built inside, the 'done' flag and the number of rounds per cycle
// are this design's choices; the paper quotes a latency of 21 cycles, which
// no whole number of rounds per cycle gives for 48 rounds.
module tdes_core #(
  parameter int unsigned RPC = 2  // Feistel rounds per clock; must divide 48
) (
  input  logic        clk,
  input  logic        rst,      // synchronous, active high
  input  logic        start,
  input  logic        decrypt,  // 0: encrypt, 1: decrypt
  input  logic [63:0] din,
  input  logic [63:0] key1,
  input  logic [63:0] key2,
  input  logic [63:0] key3,
  output logic [63:0] dout,
  output logic        done
);
  import des_pkg::*;

  localparam int unsigned ROUNDS = 48;

  logic [31:0] l_q, r_q;
  logic [5:0]  rnd_q;       // rounds completed so far
  logic        busy_q, done_q, dec_q;
  logic [31:0] l_n, r_n;

  // RPC rounds of the 48-round chain, starting at round rnd_q.
  always_comb begin
    logic [31:0] t;
    logic [5:0]  i;
    logic [1:0]  pass;
    logic [3:0]  r;
    logic        pass_dec;
    logic [63:0] k;
    l_n = l_q;
    r_n = r_q;
    for (int j = 0; j < int'(RPC); j++) begin
      i    = rnd_q + 6'(j);
      pass = i[5:4];
      r    = i[3:0];
      if (r == 4'd0 && pass != 2'd0) begin  // DES pass boundary
        t   = l_n;
        l_n = r_n;
        r_n = t;
      end
      pass_dec = dec_q ^ (pass == 2'd1);    // EDE: middle pass runs the other way
      unique case (pass)
        2'd0:    k = dec_q ? key3 : key1;
        2'd1:    k = key2;
        default: k = dec_q ? key1 : key3;
      endcase
      t   = r_n;
      r_n = l_n ^ feistel(r_n, subkey(k, pass_dec ? 4'(15 - r) : r));
      l_n = t;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      l_q    <= '0;
      r_q    <= '0;
      rnd_q  <= '0;
      busy_q <= 1'b0;
      done_q <= 1'b0;
      dec_q  <= 1'b0;
    end else if (start) begin
      {l_q, r_q} <= initial_perm(din);
      rnd_q      <= '0;
      busy_q     <= 1'b1;
      done_q     <= 1'b0;
      dec_q      <= decrypt;
    end else if (busy_q) begin
      l_q   <= l_n;
      r_q   <= r_n;
      rnd_q <= rnd_q + 6'(RPC);
      if (rnd_q + 6'(RPC) == 6'(ROUNDS)) begin
        busy_q <= 1'b0;
        done_q <= 1'b1;
      end
    end
  end

  assign dout = final_perm({r_q, l_q});
  assign done = done_q;

  initial assert (ROUNDS % RPC == 0) else $error("RPC must divide 48");
endmodule
