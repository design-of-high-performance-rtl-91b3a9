// forwarding_unit_tb: checks the bypass selection, including priority of
// the newer (MEM) result, loads in MEM not being forwarded and register 0.
module forwarding_unit_tb;
  import mips_pkg::*;
  logic [4:0] ex_rs, ex_rt, mem_dest, wb_dest;
  logic       mem_reg_write, mem_load, wb_reg_write;
  fwd_e       fwd_a, fwd_b;
  int checks = 0, failures = 0;

  forwarding_unit dut (.*);

  function automatic fwd_e model(input logic [4:0] s);
    if (s != 0 && mem_reg_write && !mem_load && mem_dest == s) return FWD_EXMEM;
    if (s != 0 && wb_reg_write && wb_dest == s) return FWD_MEMWB;
    return FWD_NONE;
  endfunction

  initial begin
    // directed: newest producer wins
    ex_rs = 5'd5; ex_rt = 5'd6; mem_reg_write = 1; mem_load = 0; mem_dest = 5'd5;
    wb_reg_write = 1; wb_dest = 5'd5;
    #1 checks += 2;
    if (fwd_a !== FWD_EXMEM) failures++;
    if (fwd_b !== FWD_NONE)  failures++;
    mem_load = 1;
    #1 checks++;
    if (fwd_a !== FWD_MEMWB) failures++;
    for (int n = 0; n < 3000; n++) begin
      ex_rs = 5'($urandom % 4); ex_rt = 5'($urandom % 4);
      mem_dest = 5'($urandom % 4); wb_dest = 5'($urandom % 4);
      {mem_reg_write, mem_load, wb_reg_write} = 3'($urandom);
      #1;
      checks += 2;
      if (fwd_a !== model(ex_rs)) failures++;
      if (fwd_b !== model(ex_rt)) failures++;
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
