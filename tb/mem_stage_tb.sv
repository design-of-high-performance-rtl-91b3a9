// mem_stage_tb: memory access unit with the paper's encrypted data image.
//
// Cipher loads of the seven array blocks must return 2, 4, ..., 14 and keep
// 'busy' for 1 + 48/RPC cycles; a cipher store of 0x38 at 56 must leave the
// block 0x2542b17039a61551 of the paper (an access occupies MEM for the 1 +
// 48/RPC busy cycles plus its final cycle); key loads stay plain in cipher mode;
// plain half-word loads and stores are checked as well.
module mem_stage_tb;
  localparam int unsigned RPC = 2;
  localparam int unsigned LAT = 1 + 48 / RPC;

  logic        clk = 1'b0, rst = 1'b1;
  logic        valid = 1'b0, mem_read = 1'b0, mem_write = 1'b0, key_load = 1'b0, cipher = 1'b0;
  logic [31:0] addr = '0, store_data = '0, load_data;
  logic [63:0] key1 = '0, key2 = '0, key3 = 64'h4b4952415450414c;
  logic        busy, ext_we = 1'b0;
  logic [9:0]  ext_addr = '0;
  logic [31:0] ext_wdata = '0, ext_rdata;
  logic [63:0] img [19];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mem_stage #(.ENCRYPTED(1'b1), .RPC(RPC), .DMEM_BYTES(1024)) dut (.*);

  task automatic expect_eq(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  // One access; returns the load data of its last cycle.
  task automatic access(input logic rd, input logic wr, input logic key, input logic ciph,
                        input logic [31:0] a, input logic [31:0] d, output logic [31:0] q,
                        input int exp_cycles);
    int c = 1;
    valid = 1'b1; mem_read = rd; mem_write = wr; key_load = key; cipher = ciph;
    addr = a; store_data = d;
    #1;
    while (busy && c < 200) begin
      @(posedge clk); #1;
      c++;
    end
    q = load_data;
    expect_eq(64'(c), 64'(exp_cycles), "access cycles");
    @(posedge clk); #1;
    valid = 1'b0; mem_read = 1'b0; mem_write = 1'b0; key_load = 1'b0;
  endtask

  task automatic read_block(input logic [9:0] a, output logic [63:0] b);
    ext_addr = a;     #1 b[31:0]  = ext_rdata;
    ext_addr = a + 4; #1 b[63:32] = ext_rdata;
  endtask

  initial begin
    logic [31:0] q;
    logic [63:0] b;
    $readmemh("tb/prog_enc_dmem.hex", img);
    foreach (img[i]) for (int h = 0; h < 2; h++) begin
      ext_addr = 10'(8 * i + 4 * h); ext_wdata = h ? img[i][63:32] : img[i][31:0]; ext_we = 1'b1;
      @(posedge clk); #1;
    end
    ext_we = 1'b0;
    rst = 1'b0;
    for (int i = 0; i < 7; i++) begin
      access(1, 0, 0, 1, 32'(8 * i), 0, q, LAT + 1);
      expect_eq(64'(q), 64'(2 * (i + 1)), "cipher load");
    end
    access(1, 0, 1, 1, 32'd136, 0, q, 1);
    expect_eq(64'(q), 64'h5450414c, "key load stays plain");
    access(0, 1, 0, 1, 32'd56, 32'h38, q, LAT + 1);
    read_block(10'd56, b);
    expect_eq(b, 64'h2542b17039a61551, "cipher store");
    access(0, 1, 0, 0, 32'd204, 32'hcafef00d, q, 1);
    access(0, 1, 0, 0, 32'd200, 32'h12345678, q, 1);
    read_block(10'd200, b);
    expect_eq(b, 64'hcafef00d12345678, "plain stores");
    access(1, 0, 0, 0, 32'd204, 0, q, 1);
    expect_eq(64'(q), 64'hcafef00d, "plain load upper half");
    // round trip: cipher store then cipher load of a random word
    for (int n = 0; n < 4; n++) begin
      logic [31:0] r = $urandom;
      access(0, 1, 0, 1, 32'd256, r, q, LAT + 1);
      access(1, 0, 0, 1, 32'd256, 0, q, LAT + 1);
      expect_eq(64'(q), 64'(r), "cipher round trip");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
