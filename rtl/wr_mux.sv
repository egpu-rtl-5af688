// wr_mux: the 16:1 write address and write data multiplexers of the shared
// memory's single write port.
//
// A store runs one thread per cycle, so exactly one lane is valid; the
// multiplexers route its address (its Ra) and its data (its Rd) to the write
// port.  No two lanes may store at once (egpu_sm asserts this).
// Combinational.
module wr_mux
  import egpu_pkg::*;
(
  input  logic [LANES-1:0] lane_valid,
  input  logic [31:0]      lane_addr [LANES],
  input  logic [31:0]      lane_data [LANES],
  output logic             wr_valid,
  output logic [31:0]      wr_addr,
  output logic [31:0]      wr_data
);
  always_comb begin
    wr_valid = |lane_valid;
    wr_addr  = 32'h0;
    wr_data  = 32'h0;
    for (int l = 0; l < LANES; l++) begin
      wr_addr = wr_addr | (lane_valid[l] ? lane_addr[l] : 32'h0);
      wr_data = wr_data | (lane_valid[l] ? lane_data[l] : 32'h0);
    end
  end
endmodule
