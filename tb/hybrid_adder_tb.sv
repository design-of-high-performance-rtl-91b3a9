// hybrid_adder_tb: compares the carry-skip/carry-select adder with the
// built-in addition on corner cases and random operands, both carry-ins.
module hybrid_adder_tb;
  logic [31:0] a, b, sum;
  logic        cin, cout;
  int checks = 0, failures = 0;

  hybrid_adder #(.WIDTH(32), .BLOCK(4)) dut (.*);

  task automatic try(input logic [31:0] x, input logic [31:0] y, input logic c);
    logic [32:0] ref_sum;
    a = x; b = y; cin = c;
    #1;
    ref_sum = {1'b0, x} + {1'b0, y} + {32'd0, c};
    checks++;
    if ({cout, sum} !== ref_sum) begin
      failures++;
      $display("FAIL %h + %h + %0d = %h, expected %h", x, y, c, {cout, sum}, ref_sum);
    end
  endtask

  initial begin
    try(32'h0, 32'h0, 1'b0);
    try(32'hffffffff, 32'h0, 1'b1);          // carry skips through every group
    try(32'hffffffff, 32'hffffffff, 1'b1);
    try(32'h0f0f0f0f, 32'hf0f0f0f0, 1'b1);   // all-propagate groups
    try(32'h7fffffff, 32'h1, 1'b0);
    for (int i = 0; i < 2000; i++) try($urandom, $urandom, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
