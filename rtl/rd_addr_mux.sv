// rd_addr_mux: the 16:4 read address multiplexer in front of the shared memory.
//
// A load is served four threads per cycle: in phase p the lanes 4p..4p+3
// present their addresses, and lane 4p+j is routed to read port j.  The read
// data need no multiplexer on the way back, since port j always returns to the
// lanes j, j+4, j+8 and j+12.  At most one of lanes j, j+4, j+8, j+12 may be
// valid (egpu_sm asserts this); the multiplexer is an AND-OR of the valid
// lanes.  Combinational.
module rd_addr_mux
  import egpu_pkg::*;
(
  input  logic [LANES-1:0] lane_valid,
  input  logic [31:0]      lane_addr  [LANES],
  output logic             port_valid [SHM_PORTS],
  output logic [31:0]      port_addr  [SHM_PORTS]
);
  localparam int GROUPS = LANES / SHM_PORTS;

  always_comb begin
    for (int j = 0; j < SHM_PORTS; j++) begin
      port_valid[j] = 1'b0;
      port_addr[j]  = 32'h0;
      for (int g = 0; g < GROUPS; g++) begin
        port_valid[j] = port_valid[j] | lane_valid[g*SHM_PORTS + j];
        port_addr[j]  = port_addr[j] | (lane_valid[g*SHM_PORTS + j] ? lane_addr[g*SHM_PORTS + j] : 32'h0);
      end
    end
  end

endmodule
