// imem: instruction memory, 40-bit words, parameterizable depth.
//
// One synchronous write port for the external agent, which may reload any
// part of the program the SM is not executing, even while it runs (as the
// paper allows), and one read port with a registered address for the fetch
// stage: raddr in cycle t gives rdata in cycle t+1.  Default depth 512, the
// 512 x 40 block one M20K holds.  Contents are not reset.
module imem
  import egpu_pkg::*;
#(
  parameter int DEPTH = 512,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [IW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [IW-1:0] rdata
);
  logic [IW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
