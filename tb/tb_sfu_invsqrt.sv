// tb_sfu_invsqrt: unit test of the inverse-square-root unit.
//
// Random positive normal inputs over a wide exponent range, one per cycle;
// each result must be within a relative error of 1e-6 of 1/sqrt(x) computed
// in double precision, arrive SFU_LAT cycles later and keep its tag.  Special
// inputs (zero, negative, infinity, NaN) are checked against their defined
// results.
module tb_sfu_invsqrt;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [31:0] x, result;
  logic [8:0]  in_tag, out_tag;

  sfu_invsqrt dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] x_q [$];
  logic [8:0]  tag_q [$];
  int          t_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [31:0] xi, e;
    int t;
    bit ok;
    checks++;
    xi = x_q.pop_front();
    t  = t_q.pop_front();
    ok = (out_tag == tag_q.pop_front()) && (cyc - t == SFU_LAT);
    if (xi == 32'h0)             ok &= (result == 32'h7f80_0000);
    else if (xi == 32'h8000_0000) ok &= (result == 32'hff80_0000);
    else if (xi == 32'h7f80_0000) ok &= (result == 32'h0);
    else if (xi[31] || xi[30:23] == 8'hff) ok &= (result == 32'h7fc0_0000);
    else ok &= (rel_err(result, 1.0 / $sqrt(f2r(xi))) < 1.0e-6);
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL x=%h got %h", xi, result);
    end
  end

  task automatic issue(input logic [31:0] v);
    @(negedge clk);
    in_valid = 1; x = v; in_tag = 9'($urandom);
    x_q.push_back(v); tag_q.push_back(in_tag); t_q.push_back(cyc);
  endtask

  initial begin
    in_valid = 0; x = 0; in_tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    issue(32'h3f80_0000);
    issue(32'h4080_0000);
    issue(32'h0);
    issue(32'h8000_0000);
    issue(32'hbf80_0000);
    issue(32'h7f80_0000);
    issue(32'h7fc0_0000);
    for (int i = 0; i < 3000; i++) issue(rand_fp(-120, 120, 1));
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (x_q.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
