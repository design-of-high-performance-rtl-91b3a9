// data_mem_tb: random mixes of 64-bit, half-word and external writes,
// checked against a reference array through both read ports.
module data_mem_tb;
  logic        clk = 1'b0, ext_we = 1'b0;
  logic [9:0]  addr = '0, ext_addr = '0;
  logic [63:0] rdata, wdata = '0;
  logic [1:0]  we = '0;
  logic [31:0] ext_wdata = '0, ext_rdata;
  logic [63:0] model [128];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_mem #(.BYTES(1024)) dut (.*);

  initial begin
    #1;
    for (int i = 0; i < 256; i++) begin   // defined contents first
      ext_addr = 10'(4 * i); ext_wdata = 32'(i); ext_we = 1'b1;
      if (i % 2 == 1) model[i/2][63:32] = ext_wdata;
      else            model[i/2][31:0]  = ext_wdata;
      @(posedge clk); #1;
    end
    for (int n = 0; n < 3000; n++) begin
      addr = 10'($urandom); we = 2'($urandom); wdata = {$urandom, $urandom};
      ext_addr = 10'($urandom); ext_wdata = $urandom; ext_we = ($urandom % 4 == 0);
      #1;
      checks += 2;
      if (rdata !== model[addr[9:3]]) failures++;
      if (ext_rdata !== (ext_addr[2] ? model[ext_addr[9:3]][63:32] : model[ext_addr[9:3]][31:0])) failures++;
      @(posedge clk);
      if (ext_we) begin
        if (ext_addr[2]) model[ext_addr[9:3]][63:32] = ext_wdata;
        else             model[ext_addr[9:3]][31:0]  = ext_wdata;
      end else begin
        if (we[0]) model[addr[9:3]][31:0]  = wdata[31:0];
        if (we[1]) model[addr[9:3]][63:32] = wdata[63:32];
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
