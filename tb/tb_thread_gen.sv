// tb_thread_gen: unit test of the thread ID generator.
//
// For every wavefront and every row length 2^k of the 2D thread space,
// checks that lane l gets IDx = t mod 2^k and IDy = t div 2^k with
// t = 16*wavefront + l.
module tb_thread_gen;
  import egpu_pkg::*;

  logic [4:0]  wf;
  logic [3:0]  cfg_x_log2;
  logic [31:0] tdx [16];
  logic [31:0] tdy [16];
  thread_gen dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k <= 9; k++)
      for (int w = 0; w < 32; w++) begin
        wf = 5'(w); cfg_x_log2 = 4'(k);
        #1;
        for (int l = 0; l < 16; l++) begin
          int t;
          t = 16 * w + l;
          checks++;
          if (tdx[l] != 32'(t % (1 << k)) || tdy[l] != 32'(t / (1 << k))) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d t=%0d: %0d,%0d", k, t, tdx[l], tdy[l]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
