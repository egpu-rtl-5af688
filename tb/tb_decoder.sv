// tb_decoder: unit test of the I-word decoder.
//
// Builds random I-words field by field for every opcode (and some undefined
// ones) and checks the extracted fields, the sign-extended immediate and the
// class flags against a table written here.
module tb_decoder;
  import egpu_pkg::*;

  logic [39:0] iword;
  decoded_t    dec;
  decoder dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what, input int opc);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s opcode %0d", what, opc);
    end
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int opc, ty;
      logic [1:0] vw, vd;
      logic [3:0] rd, ra, rb;
      logic x;
      logic [14:0] imm;
      seq_class_e cls;
      bit fp, in, ctrl;
      opc = $urandom_range(0, 30);
      ty  = $urandom_range(0, 2);
      vw = 2'($urandom); vd = 2'($urandom); rd = 4'($urandom); ra = 4'($urandom);
      rb = 4'($urandom); x = 1'($urandom); imm = 15'($urandom);
      iword = {vw, vd, 6'(opc), 2'(ty), rd, ra, rb, x, imm};
      #1;
      chk(dec.var_w == vw && dec.var_d == vd && dec.rd == rd && dec.ra == ra &&
          dec.rb == rb && dec.x == x && dec.imm15 == imm, "fields", opc);
      chk(dec.imm == {{17{imm[14]}}, imm}, "sign extension", opc);
      cls  = (opc == 10) ? C_LOAD : (opc == 11) ? C_STORE
           : ((opc >= 18 && opc <= 23) || opc == 0 || opc > 23) ? C_CTRL : C_WAVE;
      fp   = (opc >= 1 && opc <= 3 && ty == 2);
      in   = (opc >= 1 && opc <= 3 && ty != 2) || (opc >= 4 && opc <= 9);
      ctrl = (cls == C_CTRL);
      chk(dec.cls == cls, "class", opc);
      chk(dec.fp_op == fp && dec.int_op == in, "alu select", opc);
      chk(dec.load == (opc == 10) && dec.store == (opc == 11), "load/store", opc);
      chk(dec.imm_en == (opc == 12) && dec.tid_en == (opc == 13 || opc == 14) &&
          dec.tid_y == (opc == 14), "imm/tid", opc);
      chk(dec.dot == (opc == 15 || opc == 16) && dec.sum == (opc == 16) &&
          dec.sfu == (opc == 17), "extension", opc);
      chk(dec.is_ctrl == ctrl && dec.stop == (opc == 23), "control", opc);
      chk(opc > 23 ? dec.op == OP_NOP : int'(dec.op) == opc, "op", opc);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
