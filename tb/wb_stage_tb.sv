// wb_stage_tb: checks the write-back multiplexer and the routing of key
// loads to the key register for random inputs.
module wb_stage_tb;
  logic        valid, reg_write, key_write, mem_to_reg, rf_we, key_we;
  logic [4:0]  dest, rf_waddr;
  logic [2:0]  key_idx, key_widx;
  logic [31:0] alu_result, mem_data, rf_wdata, key_wdata;
  int checks = 0, failures = 0;

  wb_stage dut (.*);

  initial begin
    for (int n = 0; n < 1000; n++) begin
      {valid, reg_write, key_write, mem_to_reg} = 4'($urandom);
      dest = 5'($urandom); key_idx = 3'($urandom);
      alu_result = $urandom; mem_data = $urandom;
      #1;
      checks += 6;
      if (rf_we !== (valid && reg_write)) failures++;
      if (rf_waddr !== dest) failures++;
      if (rf_wdata !== (mem_to_reg ? mem_data : alu_result)) failures++;
      if (key_we !== (valid && key_write)) failures++;
      if (key_widx !== key_idx) failures++;
      if (key_wdata !== mem_data) failures++;
    end
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
