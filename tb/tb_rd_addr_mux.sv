// tb_rd_addr_mux: unit test of the 16:4 read address multiplexer.
//
// For each load phase p (lanes 4p..4p+3, any subset valid) and random
// addresses, read port j must carry lane 4p+j's address and valid.
module tb_rd_addr_mux;
  import egpu_pkg::*;

  logic [15:0] lane_valid;
  logic [31:0] lane_addr [16];
  logic        port_valid [4];
  logic [31:0] port_addr [4];

  rd_addr_mux dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int p;
      logic [3:0] sub;
      p = $urandom_range(0, 3);
      sub = (i % 2) ? 4'hf : 4'($urandom);
      for (int l = 0; l < 16; l++) lane_addr[l] = $urandom;
      lane_valid = 16'(sub) << (4 * p);
      #1;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (port_valid[j] !== sub[j] || (sub[j] && port_addr[j] !== lane_addr[4*p + j])) begin
          failures++;
          if (failures < 10) $display("FAIL phase %0d port %0d", p, j);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
