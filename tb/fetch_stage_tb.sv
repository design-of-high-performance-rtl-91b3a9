// fetch_stage_tb: fetch unit with the paper's encrypted program image.
//
// Plain mode: the first clear blocks come out one per cycle with the PC
// stepping by 8. Cipher mode: the encrypted blocks at 168.. decrypt to the
// expected instructions (worked out with an independent DES), each one
// valid 1 + 48/RPC cycles after the PC reaches it. A redirect in the middle
// of a cipher run restarts at the new PC.
module fetch_stage_tb;
  localparam int unsigned RPC = 2;
  localparam int unsigned LAT = 1 + 48 / RPC;

  logic        clk = 1'b0, rst = 1'b1, crypt_en = 1'b0, take = 1'b0, redirect = 1'b0;
  logic [63:0] key1 = '0, key2 = '0, key3 = 64'h4b4952415450414c;
  logic [31:0] redirect_pc = '0, instr, pc, ext_wdata = '0, ext_rdata;
  logic        valid, cipher_busy, ext_we = 1'b0;
  logic [9:0]  ext_addr = '0;
  logic [63:0] img [36];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  fetch_stage #(.ENCRYPTED(1'b1), .RPC(RPC), .IMEM_BYTES(1024)) dut (.*);

  // Instructions of blocks 21..35 after decryption.
  localparam logic [31:0] PLAIN [15] = '{
    32'h20010007, 32'h00001020, 32'h20030000, 32'h20040000, 32'h00422820,
    32'h00a52820, 32'h00a52820, 32'h00a32820, 32'h8ca60000, 32'h00862020,
    32'h20420001, 32'h0041382a, 32'h10e00008, 32'h08000032, 32'hac040038
  };

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  task automatic fetch_one(input logic [31:0] exp_pc, input logic [31:0] exp_instr, input int exp_wait);
    int w = 0;
    take = 1'b1;
    #1;
    while (!valid && w < 200) begin
      @(posedge clk); #1;
      w++;
    end
    expect_eq(pc, exp_pc, "pc");
    expect_eq(instr, exp_instr, "instr");
    expect_eq(32'(w), 32'(exp_wait), "wait cycles");
    @(posedge clk); #1;
  endtask

  initial begin
    $readmemh("tb/prog_enc_imem.hex", img);
    foreach (img[i]) for (int h = 0; h < 2; h++) begin
      ext_addr = 10'(8 * i + 4 * h); ext_wdata = h ? img[i][63:32] : img[i][31:0]; ext_we = 1'b1;
      @(posedge clk); #1;
    end
    ext_we = 1'b0;
    rst = 1'b0;
    for (int i = 0; i < 21; i++) fetch_one(32'(8 * i), img[i][31:0], 0);
    crypt_en = 1'b1;
    for (int i = 0; i < 15; i++) fetch_one(32'(168 + 8 * i), PLAIN[i], LAT);
    // redirect to the loop head while a run is in progress
    take = 1'b0;
    repeat (5) @(posedge clk);
    #1 redirect = 1'b1; redirect_pc = 32'd200;
    @(posedge clk); #1 redirect = 1'b0;
    fetch_one(32'd200, PLAIN[4], LAT);
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
