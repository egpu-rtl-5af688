// tb_output_block: unit test of the output block that forms the SPs' control.
//
// Random decoded instructions, wavefronts, lane masks and thread IDs; one
// cycle later the control word must carry {wavefront, Rx} register
// addresses (or, with X set, the snooped wavefront from the immediate), the
// store's data register on the bb port, the enables only when issued, the
// immediate, the lane enables and the selected thread ID.
module tb_output_block;
  import egpu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        issue;
  decoded_t    dec;
  logic [4:0]  wf;
  logic [15:0] lane_mask, lane_en;
  logic [31:0] tdx [16];
  logic [31:0] tdy [16];
  sp_ctl_t     ctl;
  logic [31:0] tid [16];

  output_block dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    issue = 0; dec = '0; wf = 0; lane_mask = 0;
    for (int l = 0; l < 16; l++) begin tdx[l] = 0; tdy[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      decoded_t d;
      logic [4:0] w;
      logic [15:0] m;
      bit is;
      logic [31:0] x [16];
      logic [31:0] y [16];
      @(negedge clk);
      d = '0;
      d.op = opcode_e'($urandom_range(1, 17));
      d.typ = num_type_e'($urandom_range(0, 2));
      d.rd = 4'($urandom); d.ra = 4'($urandom); d.rb = 4'($urandom);
      d.x = ($urandom_range(0, 3) == 0);
      d.imm15 = 15'($urandom); d.imm = {{17{d.imm15[14]}}, d.imm15};
      d.fp_op = 1'($urandom); d.int_op = 1'($urandom); d.load = 1'($urandom);
      d.store = ($urandom_range(0, 3) == 0); d.imm_en = 1'($urandom); d.tid_en = 1'($urandom);
      d.tid_y = 1'($urandom); d.dot = 1'($urandom); d.sum = 1'($urandom); d.sfu = 1'($urandom);
      w = 5'($urandom); m = 16'($urandom); is = ($urandom_range(0, 4) != 0);
      for (int l = 0; l < 16; l++) begin x[l] = $urandom; y[l] = $urandom; end
      dec = d; wf = w; lane_mask = m; issue = is; tdx = x; tdy = y;
      @(negedge clk);
      issue = 0;
      chk(ctl.ra_addr == (d.x ? {d.imm15[14:10], d.ra} : {w, d.ra}), "ra address");
      chk(ctl.rb_addr == (d.store ? {w, d.rd} : (d.x ? {d.imm15[9:5], d.rb} : {w, d.rb})), "rb address");
      chk(ctl.wa == {w, d.rd}, "write address");
      chk(ctl.imm == d.imm && ctl.op == d.op && ctl.typ == d.typ, "immediate/op");
      chk({ctl.fp_op, ctl.int_op, ctl.load, ctl.store, ctl.imm_en, ctl.tid_en, ctl.dot, ctl.sum, ctl.sfu}
          == (is ? {d.fp_op, d.int_op, d.load, d.store, d.imm_en, d.tid_en, d.dot, d.sum, d.sfu} : 9'h0),
          "enables");
      chk(lane_en == (is ? m : 16'h0), "lane enables");
      for (int l = 0; l < 16; l++) chk(tid[l] == (d.tid_y ? y[l] : x[l]), "thread id");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
