// tb_regfile: unit test of one 512 x 32 register-file copy.
//
// Random writes and reads against a reference array; checks the one-cycle
// read latency and that a read in the same cycle as a write to the same word
// returns the old word.
module tb_regfile;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we;
  logic [8:0]  wa, ra;
  logic [31:0] wd, rd;
  regfile dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [512];
  bit          valid [512];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_v;
    bit          exp_ok;
    we = 0; wa = 0; wd = 0; ra = 0;
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      we = 1; wa = 9'(a); wd = $urandom; ref_mem[a] = wd; valid[a] = 1;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      ra = 9'($urandom);
      if (i % 3 == 0) begin
        we = 1; wa = (i % 6 == 0) ? ra : 9'($urandom); wd = $urandom;
      end else we = 0;
      exp_v  = ref_mem[ra];             // old word, even if written now
      if (we) ref_mem[wa] = wd;
      @(negedge clk);
      we = 0;
      checks++;
      if (rd !== exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d got %h expected %h", ra, rd, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
