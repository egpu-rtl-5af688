// tb_imem: unit test of the instruction memory.
//
// Writes random 40-bit words, reads them back with the one-cycle read
// latency, and rewrites part of the memory while another part is being read
// (the external agent updating the program during execution).
module tb_imem;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we;
  logic [8:0]  waddr, raddr;
  logic [39:0] wdata, rdata;
  imem dut (.*);

  int checks = 0, failures = 0;
  logic [39:0] ref_mem [512];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a); wdata = {8'($urandom), 32'($urandom)}; ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      raddr = 9'($urandom_range(0, 255));
      we = 1; waddr = 9'($urandom_range(256, 511)); wdata = {8'($urandom), 32'($urandom)};
      ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== ref_mem[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL %0d", raddr);
      end
    end
    for (int a = 256; a < 512; a++) begin
      @(negedge clk); raddr = 9'(a);
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
