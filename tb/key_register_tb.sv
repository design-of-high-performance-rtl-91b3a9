// key_register_tb: loads the paper's keys word by word (indices 0..5) and
// random keys, and checks the three 64-bit keys after each write.
module key_register_tb;
  logic        clk = 1'b0, rst = 1'b1, we = 1'b0;
  logic [2:0]  idx = '0;
  logic [31:0] wdata = '0;
  logic [63:0] key1, key2, key3;
  logic [31:0] w [6];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  key_register dut (.*);

  task automatic put(input logic [2:0] i, input logic [31:0] d);
    idx = i; wdata = d; we = 1'b1;
    @(posedge clk); #1 we = 1'b0;
    if (i < 6) w[i] = d;
    checks += 3;
    if (key1 !== {w[1], w[0]}) failures++;
    if (key2 !== {w[3], w[2]}) failures++;
    if (key3 !== {w[5], w[4]}) failures++;
  endtask

  initial begin
    foreach (w[i]) w[i] = '0;
    @(posedge clk); #1 rst = 1'b0;
    put(3'd0, 32'h0); put(3'd1, 32'h0); put(3'd2, 32'h0); put(3'd3, 32'h0);
    put(3'd4, 32'h5450414c); put(3'd5, 32'h4b495241);
    checks++;
    if (key3 !== 64'h4b4952415450414c) failures++;   // "KIRATPAL"
    for (int n = 0; n < 200; n++) put(3'($urandom), $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
