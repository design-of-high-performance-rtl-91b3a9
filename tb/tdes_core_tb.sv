// tdes_core_tb: checks the Triple-DES core against known-answer vectors.
//
// Vectors: the classic single-DES example (all three keys equal, so EDE
// reduces to one DES), the processor's store/load example of the paper
// (plain text 0x38, keys 0, 0, "KIRATPAL"), and four random three-key
// vectors computed with an independent DES implementation. Each vector is
// run in both directions, and the cycles from start to done are counted
// against the expected 48 / RPC.
module tdes_core_tb;
  localparam int unsigned RPC = 2;
  localparam int unsigned LAT = 48 / RPC;

  logic clk = 1'b0, rst = 1'b1, start = 1'b0, decrypt = 1'b0;
  logic [63:0] din = '0, key1 = '0, key2 = '0, key3 = '0, dout;
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tdes_core #(.RPC(RPC)) dut (.*);

  typedef struct packed {
    logic [63:0] k1, k2, k3, pt, ct;
  } vec_t;

  localparam vec_t VECS [7] = '{
    '{64'h133457799bbcdff1, 64'h133457799bbcdff1, 64'h133457799bbcdff1, 64'h0123456789abcdef, 64'h85e813540f0ab405},
    '{64'h0, 64'h0, 64'h4b4952415450414c, 64'h0000000000000038, 64'h2542b17039a61551},
    '{64'h0, 64'h0, 64'h4b4952415450414c, 64'h2c824fe86704fd6e, 64'h0000000000000038},
    '{64'h4164d8399f767c45, 64'h5bc8fbbcbde5c099, 64'hb0c11fdecb91ce37, 64'hd76d4330f1446bea, 64'h47760cbe1ac9713b},
    '{64'ha6eb8c9ebd69fe29, 64'h87b0b125ec1d7da0, 64'hd7210dff076ce2ef, 64'hc6a5387777330bdb, 64'h9642137a8e54d21c},
    '{64'h3fc1ea36f17fd374, 64'h0d464138a6233255, 64'h2827688de6a16a3b, 64'h5f2dd97f1cfb10f6, 64'h60f583b0c3b866de},
    '{64'hde5271007814e8a2, 64'h617959ce3f1f65a8, 64'h1a1afe878b33e968, 64'h3fd4235992edcf45, 64'h8307f4f919e7d6ae}
  };

  task automatic run(input vec_t v, input logic dec, input logic [63:0] x, input logic [63:0] expect_y);
    int cyc;
    key1 = v.k1; key2 = v.k2; key3 = v.k3;
    din = x; decrypt = dec; start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0; din = '0; decrypt = ~dec;   // inputs must be captured at start
    cyc = 1;
    while (!done && cyc < 200) begin
      @(posedge clk); #1;
      cyc++;
    end
    checks += 2;
    if (dout !== expect_y) begin
      failures++;
      $display("FAIL dec=%0b in=%h got %h expected %h", dec, x, dout, expect_y);
    end
    if (cyc != int'(LAT) + 1) begin  // the start edge plus LAT round edges
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cyc, LAT + 1);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    foreach (VECS[i]) begin
      run(VECS[i], 1'b0, VECS[i].pt, VECS[i].ct);
      run(VECS[i], 1'b1, VECS[i].ct, VECS[i].pt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
