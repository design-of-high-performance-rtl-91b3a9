// hybrid_adder: WIDTH-bit adder mixing carry-select and carry-skip.
//
// The operands are cut into BLOCK-bit groups. Each group computes its sum
// twice, for carry-in 0 and 1, and the real carry selects one (carry
// select). The carry out of a group is the incoming carry when every bit
// of the group propagates, and otherwise the group's own carry for a zero
// carry-in, which then cannot depend on the carry-in (carry skip). The carry
// therefore ripples only through one 2:1 mux per group. Combinational.
//
// The paper names a hybrid carry-skip / carry-select adder inside the ALU but
// does not describe it; the group size and this particular combination are
// this design's own.
module hybrid_adder #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned BLOCK = 4    // group size; must divide WIDTH
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);
  localparam int unsigned NB = WIDTH / BLOCK;

  logic [NB:0] c;
  assign c[0] = cin;

  for (genvar g = 0; g < NB; g++) begin : g_blk
    logic [BLOCK-1:0] ga, gb, s0, s1;
    logic             co0, prop;
    assign ga   = a[g*BLOCK +: BLOCK];
    assign gb   = b[g*BLOCK +: BLOCK];
    assign {co0, s0} = {1'b0, ga} + {1'b0, gb};
    assign s1 = ga + gb + BLOCK'(1);
    assign prop = &(ga ^ gb);
    assign sum[g*BLOCK +: BLOCK] = c[g] ? s1 : s0;   // carry select
    assign c[g+1] = prop ? c[g] : co0;                // carry skip
  end

  assign cout = c[NB];

  initial assert (WIDTH % BLOCK == 0) else $error("BLOCK must divide WIDTH");
endmodule
