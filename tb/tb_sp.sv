// tb_sp: unit test of one scalar processor (first-lane variant, HAS_EXT=1).
//
// Drives control words directly and reads registers back through the aa and
// bb ports.  Checks: immediate and thread-ID writes; INT and FP operations on
// 32 wavefronts' registers; the pipeline depth of 9 (an ALU result is not yet
// readable by an instruction issued 8 cycles later and is by one issued 9
// cycles later); an indexed load whose shared-memory data arrive 3 cycles
// after issue; a dot/SFU result written through the first lane's extra port;
// thread snooping (reading another wavefront's register); and that a
// disabled lane writes nothing.  References are computed in the testbench.
module tb_sp;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  sp_ctl_t     ctl;
  logic        lane_en;
  logic [31:0] tid, shared_data, ext_wd, data_out_aa, data_out_bb;
  logic        ext_we;
  logic [8:0]  ext_wa;

  sp #(.HAS_EXT(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_rf [512];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sp_ctl_t nop_ctl();
    sp_ctl_t c;
    c = '0;
    c.op = OP_NOP;
    c.typ = T_INT32;
    return c;
  endfunction

  task automatic cyc_ctl(input sp_ctl_t c, input logic en = 1'b1);
    @(negedge clk);
    ctl = c; lane_en = en;
  endtask

  task automatic idle(input int n);
    repeat (n) cyc_ctl(nop_ctl());
  endtask

  // read a register through both ports and compare
  task automatic check_reg(input logic [8:0] a, input logic [31:0] e, input string what);
    sp_ctl_t c;
    c = nop_ctl();
    c.ra_addr = a; c.rb_addr = a;
    cyc_ctl(c);
    @(negedge clk);
    ctl = nop_ctl();
    checks++;
    if (data_out_aa !== e || data_out_bb !== e) begin
      failures++;
      if (failures < 15) $display("FAIL %s reg %h: aa %h bb %h expected %h", what, a, data_out_aa, data_out_bb, e);
    end
  endtask

  task automatic write_imm(input logic [8:0] a, input logic [31:0] v);
    sp_ctl_t c;
    c = nop_ctl();
    c.imm_en = 1; c.wa = a; c.imm = v; c.op = OP_LODI;
    cyc_ctl(c);
    ref_rf[a] = v;
  endtask

  initial begin
    sp_ctl_t c;
    ctl = nop_ctl(); lane_en = 0; tid = 0; shared_data = 0; ext_we = 0; ext_wa = 0; ext_wd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // immediates into R1, R2 of every wavefront, thread ID into R3
    for (int w = 0; w < 32; w++) begin
      write_imm({5'(w), 4'd1}, $urandom);
      write_imm({5'(w), 4'd2}, rand_fp(-10, 10));
      write_imm({5'(w), 4'd4}, rand_fp(-10, 10));
    end
    for (int w = 0; w < 32; w++) begin
      c = nop_ctl(); c.tid_en = 1; c.wa = {5'(w), 4'd3}; c.op = OP_TDX;
      cyc_ctl(c);
      tid = 32'(w * 16 + 5);
      ref_rf[{5'(w), 4'd3}] = tid;
    end
    idle(4);
    for (int w = 0; w < 32; w++) begin
      check_reg({5'(w), 4'd1}, ref_rf[{5'(w), 4'd1}], "imm");
      check_reg({5'(w), 4'd3}, ref_rf[{5'(w), 4'd3}], "tid");
    end
    // one ALU operation per wavefront, back to back: R5 = R1 + R3, R6 = R2 * R4 (FP)
    for (int w = 0; w < 32; w++) begin
      c = nop_ctl(); c.int_op = 1; c.op = OP_ADD; c.typ = T_INT32;
      c.ra_addr = {5'(w), 4'd1}; c.rb_addr = {5'(w), 4'd3}; c.wa = {5'(w), 4'd5};
      cyc_ctl(c);
      ref_rf[{5'(w), 4'd5}] = ref_rf[{5'(w), 4'd1}] + ref_rf[{5'(w), 4'd3}];
    end
    for (int w = 0; w < 32; w++) begin
      c = nop_ctl(); c.fp_op = 1; c.op = OP_MUL; c.typ = T_FP32;
      c.ra_addr = {5'(w), 4'd2}; c.rb_addr = {5'(w), 4'd4}; c.wa = {5'(w), 4'd6};
      cyc_ctl(c);
      ref_rf[{5'(w), 4'd6}] = fmul(ref_rf[{5'(w), 4'd2}], ref_rf[{5'(w), 4'd4}]);
    end
    idle(10);
    for (int w = 0; w < 32; w++) begin
      check_reg({5'(w), 4'd5}, ref_rf[{5'(w), 4'd5}], "int add");
      check_reg({5'(w), 4'd6}, ref_rf[{5'(w), 4'd6}], "fp mul");
    end
    // pipeline depth: R7 = R1 - R3 issued in cycle 0, read issued in cycles 8 and 9
    write_imm(9'h7, 32'hdead_beef);
    idle(4);
    c = nop_ctl(); c.int_op = 1; c.op = OP_SUB;
    c.ra_addr = 9'h1; c.rb_addr = 9'h3; c.wa = 9'h7;
    cyc_ctl(c);
    idle(7);
    c = nop_ctl(); c.ra_addr = 9'h7;
    cyc_ctl(c);                        // cycle 8
    cyc_ctl(c);                        // cycle 9
    checks++;
    if (data_out_aa !== 32'hdead_beef) begin failures++; $display("FAIL result visible after 8 cycles"); end
    @(negedge clk);
    checks++;
    if (data_out_aa !== ref_rf[9'h1] - ref_rf[9'h3]) begin
      failures++; $display("FAIL result not visible after 9 cycles");
    end
    ref_rf[9'h7] = ref_rf[9'h1] - ref_rf[9'h3];
    // indexed load: data expected on shared_data three cycles after issue
    for (int w = 0; w < 8; w++) begin
      logic [31:0] v;
      v = $urandom;
      c = nop_ctl(); c.load = 1; c.op = OP_LOD; c.wa = {5'(w), 4'd8}; c.ra_addr = {5'(w), 4'd1};
      cyc_ctl(c);
      idle(2);
      shared_data = 32'h0bad_0bad;
      cyc_ctl(nop_ctl());
      shared_data = v;
      @(negedge clk);
      shared_data = 32'h0bad_0bad;
      ref_rf[{5'(w), 4'd8}] = v;
      idle(4);
      check_reg({5'(w), 4'd8}, v, "load");
    end
    // first-lane extra write port (dot product / SFU result)
    @(negedge clk);
    ext_we = 1; ext_wa = {5'd9, 4'd9}; ext_wd = 32'h1234_5678;
    @(negedge clk);
    ext_we = 0;
    ref_rf[{5'd9, 4'd9}] = 32'h1234_5678;
    idle(3);
    check_reg({5'd9, 4'd9}, 32'h1234_5678, "ext write");
    // thread snooping: wavefront 0's instruction reads wavefront 9's registers
    c = nop_ctl(); c.int_op = 1; c.op = OP_XOR;
    c.ra_addr = {5'd9, 4'd9}; c.rb_addr = {5'd9, 4'd1}; c.wa = {5'd0, 4'd10};
    cyc_ctl(c);
    ref_rf[{5'd0, 4'd10}] = ref_rf[{5'd9, 4'd9}] ^ ref_rf[{5'd9, 4'd1}];
    idle(10);
    check_reg({5'd0, 4'd10}, ref_rf[{5'd0, 4'd10}], "snoop");
    // a disabled lane writes nothing
    c = nop_ctl(); c.imm_en = 1; c.wa = 9'h1; c.imm = 32'h5555_5555;
    cyc_ctl(c, 1'b0);
    c = nop_ctl(); c.int_op = 1; c.op = OP_ADD; c.ra_addr = 9'h1; c.rb_addr = 9'h1; c.wa = 9'h3;
    cyc_ctl(c, 1'b0);
    idle(12);
    check_reg(9'h1, ref_rf[9'h1], "masked imm");
    check_reg(9'h3, ref_rf[9'h3], "masked alu");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
