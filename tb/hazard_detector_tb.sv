// hazard_detector_tb: exhaustive check of the load-use rule over small
// register numbers and all flag combinations.
module hazard_detector_tb;
  logic       id_valid, id_uses_rs, id_uses_rt, ex_valid, ex_load, stall;
  logic [4:0] id_rs, id_rt, ex_dest;
  int checks = 0, failures = 0;

  hazard_detector dut (.*);

  initial begin
    for (int f = 0; f < 32; f++)
      for (int rs = 0; rs < 4; rs++)
        for (int rt = 0; rt < 4; rt++)
          for (int d = 0; d < 4; d++) begin
            logic e;
            {id_valid, id_uses_rs, id_uses_rt, ex_valid, ex_load} = 5'(f);
            id_rs = 5'(rs); id_rt = 5'(rt); ex_dest = 5'(d);
            #1;
            e = id_valid && ex_valid && ex_load && d != 0 &&
                ((id_uses_rs && rs == d) || (id_uses_rt && rt == d));
            checks++;
            if (stall !== e) begin
              failures++;
              $display("FAIL flags=%b rs=%0d rt=%0d dest=%0d stall=%b", 5'(f), rs, rt, d, stall);
            end
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
