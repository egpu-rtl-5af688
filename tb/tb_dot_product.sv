// tb_dot_product: unit test of the wavefront dot product / reduction core.
//
// Streams random wavefronts (one per cycle) with random lane masks, DOT and
// SUM mixed, and compares each result and tag, DOT_LAT cycles later, with a
// reference that rounds every product and every pairwise sum the same way
// the core's tree does (egpu_tb_pkg's float model).
module tb_dot_product;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, sum_mode, out_valid;
  logic [15:0] lane_en;
  logic [31:0] a [16];
  logic [31:0] b [16];
  logic [8:0]  in_tag, out_tag;
  logic [31:0] result;

  dot_product dut (.*);

  int checks = 0, failures = 0;
  logic [40:0] exp_q [$];
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
    logic [40:0] e;
    int t;
    checks++;
    e = exp_q.pop_front();
    t = t_q.pop_front();
    if ({out_tag, result} !== e || cyc - t != DOT_LAT) begin
      failures++;
      if (failures < 10) $display("FAIL got %h/%h expected %h latency %0d", out_tag, result, e, cyc - t);
    end
  end

  initial begin
    logic [31:0] v [16];
    in_valid = 0; sum_mode = 0; lane_en = 0; in_tag = 0;
    for (int l = 0; l < 16; l++) begin a[l] = 0; b[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      sum_mode = (i % 4 == 1);
      case (i % 3)
        0: lane_en = 16'hffff;
        1: lane_en = 16'h00ff;
        default: lane_en = 16'($urandom);
      endcase
      in_tag = 9'($urandom);
      for (int l = 0; l < 16; l++) begin
        a[l] = rand_fp(-8, 8);
        b[l] = rand_fp(-8, 8);
        v[l] = lane_en[l] ? fmul(a[l], sum_mode ? 32'h3f80_0000 : b[l]) : 32'h0;
      end
      for (int n = 8; n >= 1; n /= 2)
        for (int k = 0; k < n; k++) v[k] = fadd(v[2*k], v[2*k+1]);
      if (in_valid) begin
        exp_q.push_back({in_tag, v[0]});
        t_q.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
