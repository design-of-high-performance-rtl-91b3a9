// regfile_tb: random writes and reads against a reference array; checks
// reset clearing, register 0 and the write-through of a same-cycle read.
module regfile_tb;
  logic        clk = 1'b0, rst = 1'b1, we = 1'b0;
  logic [4:0]  raddr1 = '0, raddr2 = '0, waddr = '0;
  logic [31:0] rdata1, rdata2, wdata = '0;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  regfile dut (.*);

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    @(posedge clk); #1 rst = 1'b0;
    for (int i = 0; i < 32; i++) begin
      raddr1 = 5'(i); #1 expect_eq(rdata1, 32'd0, "after reset");
    end
    for (int n = 0; n < 2000; n++) begin
      we = 1'($urandom); waddr = 5'($urandom); wdata = $urandom;
      raddr1 = 5'($urandom); raddr2 = ($urandom % 4 == 0) ? waddr : 5'($urandom);
      #1;
      expect_eq(rdata1, (we && waddr != 0 && raddr1 == waddr) ? wdata : model[raddr1], "port 1");
      expect_eq(rdata2, (we && waddr != 0 && raddr2 == waddr) ? wdata : model[raddr2], "port 2");
      @(posedge clk);
      if (we && waddr != 0) model[waddr] = wdata;
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
