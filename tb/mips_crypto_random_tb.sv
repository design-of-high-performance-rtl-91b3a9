// mips_crypto_random_tb: random programs on the full processor, checked
// against an instruction-set model written in the testbench.
//
// Each program is a clear preamble (six key loads of random keys, four NOPs,
// CRYPT 1 or CRYPT 0), then a body that initialises eight data slots with
// stores, runs random ALU, shift, immediate, load, store, forward branch and
// forward jump instructions over registers r0..r7, and finally folds all data
// slots into r7 with loads. The body ends in a jump to itself. In cipher mode
// the body is stored enciphered; the blocks are produced with a separate
// tdes_core instance in the testbench (the core is checked on its own against
// known-answer vectors). Cipher-mode data needs no cipher in the model,
// because a block stored enciphered and loaded back returns its word.
// The model runs the body sequentially; the processor's registers r1..r7
// must match it once the processor reaches the final jump.
module mips_crypto_random_tb;
  localparam int unsigned NPROG = 24;   // programs (alternately clear / cipher)
  localparam int unsigned NBODY = 50;   // random instructions per program
  localparam int unsigned DATA  = 256;  // byte address of data slot 0

  logic        clk = 1'b0, rst = 1'b1;
  logic [9:0]  ext_addr = '0;
  logic [31:0] ext_wdata = '0, ext_rdata;
  logic        ext_we = 1'b0, ext_re = 1'b0, ext_imem = 1'b0, ext_dmem = 1'b0;
  logic        crypt_en;

  int checks = 0, failures = 0;
  int n_busy_cycles = 0, n_load_use = 0, n_fwd = 0, n_taken = 0, n_jump = 0;

  always #5 clk = ~clk;

  mips_crypto dut (.*);

  always @(posedge clk) if (!rst) begin
    if (dut.mem_busy) n_busy_cycles++;
    if (dut.load_use && !dut.mem_busy) n_load_use++;
    if (dut.idex.valid && dut.fwd_a != mips_pkg::FWD_NONE) n_fwd++;
    if (dut.ex_taken && !dut.mem_busy) n_taken++;
    if (dut.id_jump) n_jump++;
  end

  // Enciphering tool for the program loader.
  logic        enc_start = 1'b0, enc_done;
  logic [63:0] enc_in = '0, enc_out, k1 = '0, k2 = '0, k3 = '0;
  tdes_core #(.RPC(48)) u_enc (
    .clk(clk), .rst(1'b0), .start(enc_start), .decrypt(1'b0), .din(enc_in),
    .key1(k1), .key2(k2), .key3(k3), .dout(enc_out), .done(enc_done)
  );

  // ------------------------------------------------------------ encoders
  function automatic logic [31:0] r_type(input int rs, rt, rd, sh, fn);
    return {6'h00, 5'(rs), 5'(rt), 5'(rd), 5'(sh), 6'(fn)};
  endfunction
  function automatic logic [31:0] i_type(input int op, rs, rt, input logic [15:0] imm);
    return {6'(op), 5'(rs), 5'(rt), imm};
  endfunction

  logic [31:0] prog [128];
  localparam logic [5:0] FNS [8] = '{6'h20, 6'h22, 6'h24, 6'h25, 6'h26, 6'h27, 6'h2a, 6'h2b};
  localparam logic [5:0] IMM_OPS [6] = '{6'h08, 6'h0a, 6'h0c, 6'h0d, 6'h0e, 6'h0f};
  int          nprog;
  logic [31:0] model_r [8];
  logic [31:0] model_m [8];

  // Sequential reference execution of prog[first..], up to the final jump.
  task automatic run_model(input int first, input int last);
    int pc = first;
    int guard = 0;
    foreach (model_r[i]) model_r[i] = '0;
    while (pc != last && guard < 1000) begin
      logic [31:0] w, a, b, res, sx, zx;
      logic [5:0]  op, fn;
      int rs, rt, rd, sh, next;
      w = prog[pc];
      op = w[31:26]; fn = w[5:0];
      rs = int'(w[25:21]); rt = int'(w[20:16]); rd = int'(w[15:11]); sh = int'(w[10:6]);
      a = model_r[rs]; b = model_r[rt];
      sx = {{16{w[15]}}, w[15:0]}; zx = {16'd0, w[15:0]};
      next = pc + 1;
      guard++;
      case (op)
        6'h00: begin
          case (fn)
            6'h00: res = b << sh;
            6'h02: res = b >> sh;
            6'h03: res = $signed(b) >>> sh;
            6'h20: res = a + b;
            6'h22: res = a - b;
            6'h24: res = a & b;
            6'h25: res = a | b;
            6'h26: res = a ^ b;
            6'h27: res = ~(a | b);
            6'h2a: res = 32'($signed(a) < $signed(b));
            6'h2b: res = 32'(a < b);
            default: res = 0;
          endcase
          if (rd != 0) model_r[rd] = res;
        end
        6'h08: if (rt != 0) model_r[rt] = a + sx;
        6'h0a: if (rt != 0) model_r[rt] = 32'($signed(a) < $signed(sx));
        6'h0c: if (rt != 0) model_r[rt] = a & zx;
        6'h0d: if (rt != 0) model_r[rt] = a | zx;
        6'h0e: if (rt != 0) model_r[rt] = a ^ zx;
        6'h0f: if (rt != 0) model_r[rt] = {w[15:0], 16'd0};
        6'h23: if (rt != 0) model_r[rt] = model_m[((a + sx) - DATA) / 8];
        6'h2b: model_m[((a + sx) - DATA) / 8] = b;
        6'h04: if (a == b) next = pc + 1 + int'(sx) / 8;
        6'h05: if (a != b) next = pc + 1 + int'(sx) / 8;
        6'h02: next = int'(w[25:0]) / 2;
        default: ;
      endcase
      pc = next;
    end
    if (guard >= 1000) begin
      failures++;
      $display("model did not terminate");
    end
  endtask

  // Build one program; returns the index of the body's first and last block.
  task automatic gen(input logic cipher, output int first, output int last);
    int n = 0;
    for (int k = 0; k < 6; k++) prog[n++] = i_type(6'h3e, 0, k, 16'(104 + 8 * k));
    repeat (4) prog[n++] = 32'h0;
    prog[n++] = {6'h3f, 26'(cipher)};
    first = n;
    for (int s = 0; s < 8; s++) begin
      prog[n++] = i_type(6'h08, 0, 1 + s % 7, 16'($urandom));
      prog[n++] = i_type(6'h2b, 0, 1 + s % 7, 16'(DATA + 8 * s));
    end
    for (int i = 0; i < int'(NBODY); i++) begin
      int kind, rs, rt, rd, room, skip;
      kind = $urandom % 10;
      rs = $urandom % 8; rt = $urandom % 8; rd = $urandom % 8;
      room = int'(first) + 16 + int'(NBODY) - 1 - n;   // random slots still to come
      skip = (room > 0) ? $urandom % ((room < 4 ? room : 4) + 1) : 0;
      case (kind)
        0, 1: prog[n++] = r_type(rs, rt, rd, 0, FNS[$urandom % 8]);
        2:    prog[n++] = r_type(0, rt, rd, $urandom % 32, ($urandom % 3 == 0) ? 0 : 2 + $urandom % 2);
        3, 4: prog[n++] = i_type(IMM_OPS[$urandom % 6], rs, rt, 16'($urandom));
        5:    prog[n++] = i_type(6'h23, 0, rt, 16'(DATA + 8 * ($urandom % 8)));
        6:    begin  // base register set just before the load (forwarded base)
                prog[n++] = i_type(6'h08, 0, 7, 16'(DATA));
                prog[n++] = i_type(6'h23, 7, rt, 16'(8 * ($urandom % 8)));
              end
        7:    prog[n++] = i_type(6'h2b, 0, rt, 16'(DATA + 8 * ($urandom % 8)));
        8:    prog[n++] = i_type(($urandom % 2) ? 6'h04 : 6'h05, rs, rt, 16'(8 * skip));
        default: begin prog[n] = {6'h02, 26'(2 * (n + 1 + skip))}; n++; end
      endcase
    end
    for (int s = 0; s < 8; s++) begin
      prog[n++] = i_type(6'h23, 0, 6, 16'(DATA + 8 * s));
      prog[n++] = r_type(7, 7, 7, 0, 6'h20);           // r7 <= 2 * r7
      prog[n++] = r_type(7, 6, 7, 0, 6'h26);           // r7 <= r7 ^ r6
    end
    last = n;
    prog[n] = {6'h02, 26'(2 * n)};                      // spin
    nprog = n + 1;
  endtask

  task automatic bus_write(input logic imem, input int a, input logic [31:0] d);
    ext_addr = 10'(a); ext_wdata = d; ext_we = 1'b1; ext_imem = imem; ext_dmem = !imem;
    @(posedge clk); #1;
    ext_we = 1'b0; ext_imem = 1'b0; ext_dmem = 1'b0;
  endtask

  task automatic encipher(input logic [31:0] w, output logic [63:0] b);
    enc_in = {32'd0, w}; enc_start = 1'b1;
    @(posedge clk); #1 enc_start = 1'b0;
    while (!enc_done) begin @(posedge clk); #1; end
    b = enc_out;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1;
    for (int p = 0; p < int'(NPROG); p++) begin
      logic cipher;
      int first, last, cyc;
      logic [31:0] kw [6];
      cipher = p[0];
      foreach (kw[i]) kw[i] = $urandom;
      k1 = {kw[1], kw[0]}; k2 = {kw[3], kw[2]}; k3 = {kw[5], kw[4]};
      gen(cipher, first, last);
      rst = 1'b1;
      @(posedge clk); #1;
      for (int i = 0; i < nprog; i++) begin
        logic [63:0] blk;
        blk = {32'd0, prog[i]};
        if (cipher && i >= first) encipher(prog[i], blk);
        bus_write(1'b1, 8 * i, blk[31:0]);
        bus_write(1'b1, 8 * i + 4, blk[63:32]);
      end
      for (int k = 0; k < 6; k++) bus_write(1'b0, 104 + 8 * k, kw[k]);
      run_model(first, last);
      @(posedge clk); #1 rst = 1'b0;
      cyc = 0;
      while (!(dut.id_jump && dut.ifid.pc == 32'(8 * last)) && cyc < 20000) begin
        @(posedge clk); #1;
        cyc++;
      end
      repeat (60) @(posedge clk);
      #1;
      for (int r = 1; r < 8; r++) begin
        checks++;
        if (dut.u_rf.regs[r] !== model_r[r]) begin
          failures++;
          $display("FAIL program %0d (cipher %0b) r%0d = %h, model %h", p, cipher, r,
                   dut.u_rf.regs[r], model_r[r]);
        end
      end
      $display("program %0d cipher=%0b: %0d blocks, %0d cycles", p, cipher, nprog, cyc);
    end
    $display("MEM cipher stall cycles %0d, load-use stalls %0d, forwards %0d, taken branches %0d, jumps %0d",
             n_busy_cycles, n_load_use, n_fwd, n_taken, n_jump);
    checks += 5;
    if (n_busy_cycles == 0) failures++;
    if (n_load_use == 0) failures++;
    if (n_fwd == 0) failures++;
    if (n_taken == 0) failures++;
    if (n_jump == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
