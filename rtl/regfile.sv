// regfile: 32 x 32-bit general purpose register file, two read ports and
// one write port. Register 0 always reads zero.
//
// Reads are combinational (in the ID stage). The write from the WB stage
// happens at the clock edge, and a read of the register being written in
// the same cycle returns the new value (write-through), so the pipeline needs
// no forwarding path from WB into ID. Reset clears every register, as the
// paper's reset "initializes all processor subunit to zero". The size follows
// the paper's register window (32 registers of 32 bits); the write-through
// is this design's choice.
module regfile (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  raddr1,
  input  logic [4:0]  raddr2,
  output logic [31:0] rdata1,
  output logic [31:0] rdata2,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata
);
  logic [31:0] regs [32];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) regs[i] <= '0;
    end else if (we && waddr != 5'd0) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb begin
    rdata1 = regs[raddr1];
    rdata2 = regs[raddr2];
    if (we && waddr != 5'd0 && waddr == raddr1) rdata1 = wdata;
    if (we && waddr != 5'd0 && waddr == raddr2) rdata2 = wdata;
    if (raddr1 == 5'd0) rdata1 = '0;
    if (raddr2 == 5'd0) rdata2 = '0;
  end
endmodule
