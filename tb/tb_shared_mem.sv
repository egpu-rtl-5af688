// tb_shared_mem: unit test of the four-read-port, one-write-port shared memory.
//
// Fills the memory through the global port, reads it back through the global
// port and through the four internal read ports with an offset, writes
// through the internal write port and checks that all four copies see the
// write.  Checks the latencies (internal read: data two cycles after the
// address; external read: ext_rvalid three cycles after ext_re) and that
// ext_ready drops while the SM uses the ports.  Reference: a plain array.
module tb_shared_mem;
  import egpu_pkg::*;

  localparam int DEPTH = 256;
  localparam int AW = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] offset;
  logic        rd_valid [SHM_PORTS];
  logic [31:0] rd_addr  [SHM_PORTS];
  logic [31:0] rd_data  [SHM_PORTS];
  logic        wr_valid;
  logic [31:0] wr_addr, wr_data;
  logic        ext_we, ext_re, ext_ready, ext_rvalid;
  logic [AW-1:0] ext_addr;
  logic [31:0] ext_wdata, ext_rdata;

  shared_mem #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [DEPTH];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    offset = 0; wr_valid = 0; wr_addr = 0; wr_data = 0;
    ext_we = 0; ext_re = 0; ext_addr = 0; ext_wdata = 0;
    for (int p = 0; p < SHM_PORTS; p++) begin rd_valid[p] = 0; rd_addr[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill through the global port
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = $urandom;
      @(negedge clk);
      ext_we = 1; ext_addr = AW'(a); ext_wdata = ref_mem[a];
    end
    @(negedge clk); ext_we = 0;
    // read back through the global port, with its latency
    for (int a = 0; a < DEPTH; a += 7) begin
      int n;
      @(negedge clk); ext_re = 1; ext_addr = AW'(a);
      @(negedge clk); ext_re = 0;
      n = 1;
      while (!ext_rvalid) begin @(negedge clk); n++; end
      check("ext read", ext_rdata, ref_mem[a]);
      check("ext read latency", 32'(n), 32'd3);
    end
    // four internal reads per cycle with an offset; data two cycles later
    for (int k = 0; k < 40; k++) begin
      int a [SHM_PORTS];
      @(negedge clk);
      offset = 32'($urandom_range(0, 63));
      for (int p = 0; p < SHM_PORTS; p++) begin
        a[p] = $urandom_range(0, DEPTH - 64);
        rd_valid[p] = 1; rd_addr[p] = 32'(a[p]);
      end
      #1;
      checks++;
      if (ext_ready) begin failures++; $display("FAIL ext_ready high during a load"); end
      @(negedge clk);
      for (int p = 0; p < SHM_PORTS; p++) rd_valid[p] = 0;
      @(negedge clk);
      for (int p = 0; p < SHM_PORTS; p++)
        check("port read", rd_data[p], ref_mem[a[p] + int'(offset)]);
    end
    // internal write, seen by all four copies
    for (int k = 0; k < 30; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 17);
      @(negedge clk);
      offset = 32'd16;
      wr_valid = 1; wr_addr = 32'(a); wr_data = $urandom;
      ref_mem[a + 16] = wr_data;
      #1;
      checks++;
      if (ext_ready) begin failures++; $display("FAIL ext_ready high during a store"); end
      @(negedge clk);
      wr_valid = 0;
      @(negedge clk);
      for (int p = 0; p < SHM_PORTS; p++) begin rd_valid[p] = 1; rd_addr[p] = 32'(a); end
      @(negedge clk);
      for (int p = 0; p < SHM_PORTS; p++) rd_valid[p] = 0;
      @(negedge clk);
      for (int p = 0; p < SHM_PORTS; p++) check("write then read", rd_data[p], ref_mem[a + 16]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
