// tb_wr_mux: unit test of the 16:1 write address / write data multiplexers.
//
// With one random lane valid the write port must carry that lane's address
// and data; with none valid it must be idle.
module tb_wr_mux;
  import egpu_pkg::*;

  logic [15:0] lane_valid;
  logic [31:0] lane_addr [16];
  logic [31:0] lane_data [16];
  logic        wr_valid;
  logic [31:0] wr_addr, wr_data;

  wr_mux dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int l;
      l = $urandom_range(0, 16);
      for (int k = 0; k < 16; k++) begin lane_addr[k] = $urandom; lane_data[k] = $urandom; end
      lane_valid = (l == 16) ? 16'h0 : (16'h1 << l);
      #1;
      checks++;
      if (l == 16) begin
        if (wr_valid) begin failures++; $display("FAIL idle port valid"); end
      end else if (!wr_valid || wr_addr !== lane_addr[l] || wr_data !== lane_data[l]) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d", l);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
