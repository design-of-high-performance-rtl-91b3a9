// hazard_detector: load-use hazard detection.
//
// When the instruction in EXE is a register load (LW) and the instruction in
// ID reads its destination, the loaded value will not exist before the end of
// MEM, too late for forwarding into EXE. The detector then asks for a
// one-cycle stall: PC and IF/ID hold and a bubble enters ID/EX, after which
// the value is forwarded from MEM/WB. Combinational.
//
// The paper names a hazard detector that stalls on operand dependences; the
// exact rule is the textbook load-use rule.
module hazard_detector (
  input  logic       id_valid,
  input  logic [4:0] id_rs,
  input  logic [4:0] id_rt,
  input  logic       id_uses_rs,
  input  logic       id_uses_rt,
  input  logic       ex_valid,
  input  logic       ex_load,     // EXE holds a load that writes a register
  input  logic [4:0] ex_dest,
  output logic       stall
);
  assign stall = id_valid && ex_valid && ex_load && ex_dest != 5'd0 &&
                 ((id_uses_rs && id_rs == ex_dest) || (id_uses_rt && id_rt == ex_dest));
endmodule
