// alu_tb: checks every ALU operation against a behavioural model on corner
// and random operands.
module alu_tb;
  import mips_pkg::*;
  alu_op_e     op;
  logic [31:0] a, b, y;
  logic [4:0]  shamt;
  int checks = 0, failures = 0;

  alu dut (.*);

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z, logic [4:0] s);
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return x ^ z;
      ALU_NOR:  return ~(x | z);
      ALU_SLT:  return ($signed(x) < $signed(z)) ? 32'd1 : 32'd0;
      ALU_SLTU: return (x < z) ? 32'd1 : 32'd0;
      ALU_SLL:  return z << s;
      ALU_SRL:  return z >> s;
      ALU_SRA:  return $signed(z) >>> s;
      ALU_LUI:  return {z[15:0], 16'd0};
      default:  return 32'd0;
    endcase
  endfunction

  task automatic try(input alu_op_e o, input logic [31:0] x, input logic [31:0] z, input logic [4:0] s);
    logic [31:0] e;
    op = o; a = x; b = z; shamt = s;
    #1;
    e = model(o, x, z, s);
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL op %s a=%h b=%h s=%0d: %h expected %h", o.name(), x, z, s, y, e);
    end
  endtask

  localparam logic [31:0] CORNER [6] = '{32'h0, 32'h1, 32'h7fffffff, 32'h80000000, 32'hffffffff, 32'h38};

  initial begin
    for (int o = 0; o <= int'(ALU_LUI); o++) begin
      foreach (CORNER[i]) foreach (CORNER[j]) try(alu_op_e'(o), CORNER[i], CORNER[j], 5'(i * 7));
      for (int k = 0; k < 300; k++) try(alu_op_e'(o), $urandom, $urandom, 5'($urandom));
    end
    // fixed results worked out by hand
    try(ALU_SLT, 32'hfffffff9, 32'd7, 5'd0);    // -7 < 7
    checks++; if (y !== 32'd1) failures++;
    try(ALU_SLTU, 32'hfffffff9, 32'd7, 5'd0);
    checks++; if (y !== 32'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
