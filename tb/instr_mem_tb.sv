// instr_mem_tb: fills the memory through the 32-bit load port with random
// data and reads it back through the 64-bit fetch port and the load port.
module instr_mem_tb;
  logic        clk = 1'b0, ext_we = 1'b0;
  logic [9:0]  fetch_addr = '0, ext_addr = '0;
  logic [63:0] fetch_data;
  logic [31:0] ext_wdata = '0, ext_rdata;
  logic [63:0] model [128];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  instr_mem #(.BYTES(1024)) dut (.*);

  initial begin
    #1;
    for (int i = 0; i < 256; i++) begin
      ext_addr = 10'(4 * i); ext_wdata = $urandom; ext_we = 1'b1;
      if (i % 2 == 1) model[i/2][63:32] = ext_wdata;
      else            model[i/2][31:0]  = ext_wdata;
      @(posedge clk); #1;
    end
    ext_we = 1'b0;
    for (int n = 0; n < 500; n++) begin
      fetch_addr = 10'($urandom);
      ext_addr   = 10'($urandom);
      #1;
      checks += 2;
      if (fetch_data !== model[fetch_addr[9:3]]) failures++;
      if (ext_rdata !== (ext_addr[2] ? model[ext_addr[9:3]][63:32] : model[ext_addr[9:3]][31:0])) failures++;
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
