// regfile: one copy of an SP's register memory, 512 words of 32 bits.
//
// Sixteen registers for each of the 32 threads a lane can hold, addressed
// {wavefront, register}.  One synchronous write port and one read port with a
// registered address, the behaviour of an FPGA block RAM (the paper fits each
// copy in one M20K).  The SP uses two copies written with the same data to get
// its two read ports.  Timing: a read address presented in cycle t gives the
// word in cycle t+1; a word written at the end of cycle t is read back by an
// address presented in cycle t+1 or later (a read in the same cycle as the
// write returns the old word).  The contents are not reset.
module regfile #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wa,
  input  logic [WIDTH-1:0] wd,
  input  logic [AW-1:0]    ra,
  output logic [WIDTH-1:0] rd
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    rd <= mem[ra];
  end
endmodule
