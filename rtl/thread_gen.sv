// thread_gen: thread IDs of the 16 lanes of the wavefront being issued.
//
// The paper allows a 2D thread space.  In this design a thread's linear index
// is t = 16*wavefront + lane, and the thread space is 2^cfg_x_log2 threads
// wide: IDx = t mod 2^cfg_x_log2, IDy = t / 2^cfg_x_log2 (a power-of-two row
// length is this design's choice).  IDs are zero-extended to 32 bits.
// Combinational.
module thread_gen
  import egpu_pkg::*;
(
  input  logic [WF_W-1:0] wf,
  input  logic [3:0]      cfg_x_log2,
  output logic [31:0]     tdx [LANES],
  output logic [31:0]     tdy [LANES]
);
  logic [3:0] xl;
  assign xl = (cfg_x_log2 > 4'd9) ? 4'd9 : cfg_x_log2;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [8:0] t;
      t      = {wf, 4'(l)};
      tdx[l] = 32'(t) & ((32'h1 << xl) - 32'h1);
      tdy[l] = 32'(t >> xl);
    end
  end
endmodule
