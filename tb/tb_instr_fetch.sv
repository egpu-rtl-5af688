// tb_instr_fetch: unit test of the fetch stage and its control flow.
//
// A small program with a subroutine nested two deep, a loop run four times
// and a jump over an instruction runs against a one-cycle memory model and
// the real decoder; operation instructions hold for three cycles before the
// testbench raises advance.  The trace of program counters at which an
// instruction completes, the cycle count, the loop counter and the done flag
// are compared with the expected ones, then the program is restarted at
// another address.
module tb_instr_fetch;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, advance, running, done;
  logic [8:0]  start_pc, pc, imem_raddr;
  logic [15:0] loop_ctr;
  logic [39:0] iword;
  decoded_t    dec;

  instr_fetch dut (.*);
  decoder     u_dec (.iword, .dec);

  logic [39:0] prog [512];
  always @(posedge clk) iword <= prog[imem_raddr];

  int checks = 0, failures = 0;
  int hold = 0;
  int trace [$];
  int cycles = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operations complete after three cycles
  always_comb advance = running && !dec.is_ctrl && hold == 2;
  always @(posedge clk) begin
    if (running && !dec.is_ctrl) hold <= (hold == 2) ? 0 : hold + 1;
    if (running) cycles <= cycles + 1;
    if (running && (dec.is_ctrl || advance)) trace.push_back(int'(pc));
  end

  task automatic run_and_check(input int spc, input int exp_trace [], input int exp_cycles);
    trace.delete();
    cycles = 0;
    @(negedge clk);
    start = 1; start_pc = 9'(spc);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (trace.size() != exp_trace.size()) begin
      failures++;
      $display("FAIL trace length %0d expected %0d", trace.size(), exp_trace.size());
    end else
      foreach (exp_trace[i]) begin
        checks++;
        if (trace[i] != exp_trace[i]) begin
          failures++;
          $display("FAIL step %0d pc %0d expected %0d", i, trace[i], exp_trace[i]);
        end
      end
    checks++;
    if (cycles != exp_cycles) begin failures++; $display("FAIL %0d cycles, expected %0d", cycles, exp_cycles); end
    checks++;
    if (running || loop_ctr != 0) begin failures++; $display("FAIL not stopped cleanly"); end
  endtask

  initial begin
    int t1 [] = '{0, 1, 10, 11, 20, 12, 2, 3, 4, 3, 4, 3, 4, 3, 4, 5, 7};
    int t2 [] = '{2, 3, 4, 3, 4, 3, 4, 3, 4, 5, 7};
    foreach (prog[i]) prog[i] = asm(OP_NOP);
    prog[0]  = asm(OP_LODI, T_INT32, 1);
    prog[1]  = asm(OP_JSR,  T_INT32, 0, 0, 0, 10);
    prog[2]  = asm(OP_INIT, T_INT32, 0, 0, 0, 4);
    prog[3]  = asm(OP_ADD,  T_INT32, 1, 1, 1);
    prog[4]  = asm(OP_LOOP, T_INT32, 0, 0, 0, 3);
    prog[5]  = asm(OP_JMP,  T_INT32, 0, 0, 0, 7);
    prog[6]  = asm(OP_LODI, T_INT32, 2);
    prog[7]  = asm(OP_STOP);
    prog[10] = asm(OP_LODI, T_INT32, 3);
    prog[11] = asm(OP_JSR,  T_INT32, 0, 0, 0, 20);
    prog[12] = asm(OP_RTS);
    prog[20] = asm(OP_RTS);
    start = 0; start_pc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 0,10,3x4 are operations (3 cycles each): 6*3 + 11 control = 29
    run_and_check(0, t1, 6 * 3 + 11);
    run_and_check(2, t2, 4 * 3 + 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
