// tb_fp_alu: unit test of the FP32 ALU (ADD, SUB, MUL).
//
// Streams one random operation per cycle and compares each result, four
// cycles later, with the double-precision reference of egpu_tb_pkg (correctly
// rounded to single, round to nearest even).  Directed cases cover exact
// cancellation, a carry into the exponent, overflow to infinity, a subnormal
// result flushed to zero, NaN and infinity operands.
module tb_fp_alu;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  opcode_e op;
  logic [31:0] a, b, result;

  fp_alu dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results are checked at the falling edge
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected result");
    end else begin
      logic [31:0] e;
      int t;
      e = exp_q.pop_front();
      t = t_q.pop_front();
      if (result !== e || cyc - t != ALU_LAT) begin
        failures++;
        if (failures < 10) $display("FAIL got %h expected %h, latency %0d", result, e, cyc - t);
      end
    end
  end

  task automatic issue(input opcode_e o, input logic [31:0] x, input logic [31:0] y,
                       input logic [31:0] e);
    @(negedge clk);
    in_valid = 1; op = o; a = x; b = y;
    exp_q.push_back(e);
    t_q.push_back(cyc);
  endtask

  initial begin
    in_valid = 0; op = OP_ADD; a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, y;
      int k;
      k = $urandom_range(0, 2);
      x = rand_fp(-20, 20);
      y = (i % 5 == 0) ? {x[31], 8'(x[30:23] - 8'($urandom_range(0, 3))), 23'($urandom)}
                       : rand_fp(-20, 20);
      case (k)
        0: issue(OP_ADD, x, y, fadd(x, y));
        1: issue(OP_SUB, x, y, fsub(x, y));
        default: issue(OP_MUL, x, y, fmul(x, y));
      endcase
    end
    issue(OP_SUB, 32'h4049_0fdb, 32'h4049_0fdb, 32'h0000_0000);  // x - x = +0
    issue(OP_ADD, 32'h3fff_ffff, 32'h3400_0000, 32'h4000_0000);  // carry into exponent
    issue(OP_MUL, 32'h7f00_0000, 32'h4000_0000, 32'h7f80_0000);  // overflow
    issue(OP_MUL, 32'h0100_0000, 32'h0100_0000, 32'h0000_0000);  // underflow, flushed
    issue(OP_ADD, 32'h7fc0_0000, 32'h3f80_0000, 32'h7fc0_0000);  // NaN
    issue(OP_ADD, 32'h7f80_0000, 32'hff80_0000, 32'h7fc0_0000);  // inf - inf
    issue(OP_ADD, 32'h7f80_0000, 32'h3f80_0000, 32'h7f80_0000);  // inf + 1
    issue(OP_MUL, 32'h0040_0000, 32'h3f80_0000, 32'h0000_0000);  // subnormal input
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
