// mips_crypto_tb: end-to-end test of the encrypted processor at its default
// parameters, running the array-sum program of the paper's encrypted-
// processor example.
//
// The host loads both memories over the external bus while reset is held:
// 21 clear blocks (key base address, six key loads with NOPs, CRYPT 1) and
// 15 Triple-DES-encrypted blocks (the loop), plus seven encrypted array
// elements and the clear keys 0, 0, "KIRATPAL" in data memory. The program
// sums the decrypted array 2, 4, ..., 14 and stores the sum 0x38 encrypted
// at address 56. The test stops at that store, checks the register file and
// the keys, then reads the stored block back over the bus and compares it
// with the cipher text 0x2542b17039a61551 given in the paper.
// It also counts how often each pipeline mechanism occurred (forwarding from
// both stages, load-use stall, branch and jump flush, cipher fetch, cipher
// load and store, key load, mode switch) and fails if one never did.
module mips_crypto_tb;
  localparam string IMEM_FILE = "tb/prog_enc_imem.hex";
  localparam string DMEM_FILE = "tb/prog_enc_dmem.hex";
  localparam logic [63:0] EXPECT_BLOCK = 64'h2542b17039a61551;
  localparam int unsigned RPC = 2;   // the top's default

  logic        clk = 1'b0, rst = 1'b1;
  logic [9:0]  ext_addr = '0;
  logic [31:0] ext_wdata = '0, ext_rdata;
  logic        ext_we = 1'b0, ext_re = 1'b0, ext_imem = 1'b0, ext_dmem = 1'b0;
  logic        crypt_en;

  int checks = 0, failures = 0;
  int cycles = 0, cycles_store = 0;

  always #5 clk = ~clk;

  mips_crypto dut (.*);

  logic [63:0] imem_img [36];
  logic [63:0] dmem_img [19];

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic bus_write(input logic imem, input logic [9:0] a, input logic [31:0] d);
    ext_addr = a; ext_wdata = d; ext_we = 1'b1; ext_imem = imem; ext_dmem = !imem;
    @(posedge clk); #1;
    ext_we = 1'b0; ext_imem = 1'b0; ext_dmem = 1'b0;
  endtask

  task automatic bus_read(input logic imem, input logic [9:0] a, output logic [31:0] d);
    ext_addr = a; ext_re = 1'b1; ext_imem = imem; ext_dmem = !imem;
    #1 d = ext_rdata;
    ext_re = 1'b0; ext_imem = 1'b0; ext_dmem = 1'b0;
  endtask

  // addi r1,r0,5; sw r1,200(r0); lw r2,200(r0); add r3,r2,r2;
  // bne r3,r0,+8; addi r4,r0,1 (skipped); sw r3,204(r0); j 56 (spin)
  localparam logic [31:0] PLAIN_PROG [8] = '{
    32'h20010005, 32'hac0100c8, 32'h8c0200c8, 32'h00421820,
    32'h14600008, 32'h20040001, 32'hac0300cc, 32'h0800000e
  };

  task automatic run_plain();
    logic [31:0] lo, hi;
    int stalls_before;
    rst = 1'b1;
    @(posedge clk); #1;
    foreach (PLAIN_PROG[i]) begin
      bus_write(1'b1, 10'(8*i),     PLAIN_PROG[i]);
      bus_write(1'b1, 10'(8*i + 4), 32'h0);
    end
    stalls_before = n_load_use;
    @(posedge clk); #1 rst = 1'b0;
    repeat (40) @(posedge clk);
    #1;
    check("plain r2 (loaded)", 64'(dut.u_rf.regs[2]), 64'd5);
    check("plain r3 (load-use)", 64'(dut.u_rf.regs[3]), 64'd10);
    check("plain r4 (skipped by bne)", 64'(dut.u_rf.regs[4]), 64'd0);
    check("plain load-use stall", 64'(n_load_use - stalls_before), 64'd1);
    rst = 1'b1;
    @(posedge clk); #1;
    bus_read(1'b0, 10'd200, lo);
    bus_read(1'b0, 10'd204, hi);
    check("plain stores at 200", {hi, lo}, {32'd10, 32'd5});
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_fwd_exmem = 0, n_fwd_memwb = 0, n_load_use = 0, n_branch_flush = 0;
  int n_jump_flush = 0, n_cipher_fetch = 0, n_cipher_load = 0, n_cipher_store = 0;
  int n_key_load = 0, n_mode_switch = 0, n_cipher_wait = 0, n_instr = 0;
  logic crypt_prev = 1'b0;
  logic store_seen = 1'b0;

  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.idex.valid && dut.idex.ctrl.uses_rs && dut.fwd_a == mips_pkg::FWD_EXMEM) n_fwd_exmem++;
    if (dut.idex.valid && dut.idex.ctrl.uses_rs && dut.fwd_a == mips_pkg::FWD_MEMWB) n_fwd_memwb++;
    if (dut.load_use && !dut.mem_busy) n_load_use++;
    if (dut.ex_taken && !dut.mem_busy) n_branch_flush++;
    if (dut.id_jump) n_jump_flush++;
    if (dut.u_if.core_start) n_cipher_fetch++;
    if (dut.u_if.cipher_busy) n_cipher_wait++;
    if (dut.u_mem.start && dut.exmem.mem_read) n_cipher_load++;
    if (dut.u_mem.start && dut.exmem.mem_write) n_cipher_store++;
    if (dut.key_we) n_key_load++;
    if (crypt_en && !crypt_prev) n_mode_switch++;  // switches to cipher mode
    if (dut.memwb.valid) n_instr++;
    crypt_prev <= crypt_en;
    if (dut.u_mem.we != 2'b00 && dut.exmem.alu_y == 32'd56) store_seen <= 1'b1;
  end

  initial begin
    logic [31:0] lo, hi;
    $readmemh(IMEM_FILE, imem_img);
    $readmemh(DMEM_FILE, dmem_img);
    repeat (2) @(posedge clk);
    #1;
    // load mode: fill both memories over the 32-bit bus
    foreach (imem_img[i]) begin
      bus_write(1'b1, 10'(8*i),     imem_img[i][31:0]);
      bus_write(1'b1, 10'(8*i + 4), imem_img[i][63:32]);
    end
    foreach (dmem_img[i]) begin
      bus_write(1'b0, 10'(8*i),     dmem_img[i][31:0]);
      bus_write(1'b0, 10'(8*i + 4), dmem_img[i][63:32]);
    end
    bus_read(1'b1, 10'd160, lo);
    check("imem read-back (CRYPT 1)", 64'(lo), 64'hfc000001);
    // run
    @(posedge clk); #1 rst = 1'b0;
    while (!store_seen) @(posedge clk);
    cycles_store = cycles;
    #1;
    check("r1", 64'(dut.u_rf.regs[1]), 64'h7);
    check("r2", 64'(dut.u_rf.regs[2]), 64'h7);
    check("r3", 64'(dut.u_rf.regs[3]), 64'h0);
    check("r4 (sum)", 64'(dut.u_rf.regs[4]), 64'h38);
    check("r5", 64'(dut.u_rf.regs[5]), 64'h30);
    check("r6", 64'(dut.u_rf.regs[6]), 64'he);
    check("r7", 64'(dut.u_rf.regs[7]), 64'h0);
    check("key1", dut.key1, 64'h0);
    check("key2", dut.key2, 64'h0);
    check("key3", dut.key3, 64'h4b4952415450414c);
    check("cipher mode", 64'(crypt_en), 64'h1);
    // back to load mode and read the stored block over the bus
    rst = 1'b1;
    @(posedge clk); #1;
    bus_read(1'b0, 10'd56, lo);
    bus_read(1'b0, 10'd60, hi);
    check("stored block at 56", {hi, lo}, EXPECT_BLOCK);
    bus_read(1'b0, 10'd0, lo);
    check("array element 0 untouched", 64'(lo), dmem_img[0][31:0]);

    // Second program, in clear code: a load followed at once by its use
    // (load-use stall), a taken BNE over one instruction and plain
    // half-word stores.
    run_plain();

    $display("cycles to the final store: %0d, instructions retired: %0d, cipher fetches: %0d",
             cycles_store, n_instr, n_cipher_fetch);
    $display("fwd EX/MEM %0d, fwd MEM/WB %0d, load-use stalls %0d, branch flushes %0d, jump flushes %0d",
             n_fwd_exmem, n_fwd_memwb, n_load_use, n_branch_flush, n_jump_flush);
    $display("cipher loads %0d, cipher stores %0d, key loads %0d, mode switches %0d, cipher fetch wait cycles %0d",
             n_cipher_load, n_cipher_store, n_key_load, n_mode_switch, n_cipher_wait);
    check("key loads", 64'(n_key_load), 64'd6);
    check("cipher loads (7 array elements)", 64'(n_cipher_load), 64'd7);
    check("cipher stores", 64'(n_cipher_store), 64'd1);
    check("mode switches", 64'(n_mode_switch), 64'd1);
    foreach (MECH[i]) begin
      checks++;
      if (MECH[i] == 0) begin
        failures++;
        $display("FAIL mechanism %0d never happened", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int MECH [6];
  always_comb MECH = '{n_fwd_exmem, n_fwd_memwb, n_load_use, n_branch_flush, n_jump_flush, n_cipher_wait};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
