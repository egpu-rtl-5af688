// tb_egpu_sm: end-to-end test of the SM at its default parameters.
//
// The testbench plays the external agent: it loads a program into the I-MEM,
// writes two float vectors A and B (one element per thread) into the shared
// memory through the global port, starts a 128-thread block (8 wavefronts,
// a 16 x 8 thread space) and, after STOP, reads the results back through the
// global port.  The program uses every instruction group: thread IDs,
// immediates, INT and FP arithmetic, logic and shifts, indexed loads and
// stores, DOT, SUM, INVSQR, thread snooping, narrowed wavefront width and
// block depth, INIT/LOOP, JSR/RTS and STOP.  Each result is compared with a
// reference worked out here (egpu_tb_pkg's float model), and the number of
// cycles the SM runs is compared with the sequencer's rules (one cycle per
// wavefront for operations, per four threads for loads, per thread for
// stores, one per control instruction), counted by a small model of the
// program's control flow.  Every mechanism is counted as it happens and one
// that never happens counts as a failure.
module tb_egpu_sm;
  import egpu_pkg::*;
  import egpu_tb_pkg::*;

  localparam int NWF = 8;
  localparam int NT  = NWF * LANES;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start;
  logic [8:0]  start_pc;
  logic [5:0]  cfg_nwf;
  logic [3:0]  cfg_x_log2;
  logic        running, done;
  logic        imem_we;
  logic [8:0]  imem_waddr;
  logic [39:0] imem_wdata;
  logic        shm_we, shm_re, shm_ready, shm_rvalid;
  logic [10:0] shm_addr;
  logic [31:0] shm_wdata, shm_rdata;

  egpu_sm dut (.*);

  int checks = 0, failures = 0;
  int run_cycles = 0;
  always @(negedge clk) if (running) run_cycles++;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program ----------------
  logic [39:0] prog [64];
  int plen = 0;
  function automatic void emit(input logic [39:0] w);
    prog[plen] = w;
    plen++;
  endfunction

  localparam int SUB_ADDR = 48;

  task automatic build_program();
    emit(asm(OP_TDX,  T_INT32, 1));                 // R1 = IDx (lane)
    emit(asm(OP_TDY,  T_INT32, 2));                 // R2 = IDy (wavefront)
    emit(asm(OP_LODI, T_INT32, 3, 0, 0, 16));       // R3 = 16
    emit(asm(OP_LODI, T_INT32, 6, 0, 0, 1));        // R6 = 1
    emit(asm(OP_LODI, T_INT32, 7, 0, 0, 0));        // R7 = 0
    emit(asm(OP_MUL,  T_INT32, 4, 2, 3));           // R4 = y*16
    emit(asm(OP_NOP));                              // RAW hazard: 8 wavefronts < depth 9
    emit(asm(OP_ADD,  T_INT32, 5, 4, 1));           // R5 = linear thread index t
    emit(asm(OP_NOP));                              // RAW hazard, and keeps the loads'
    emit(asm(OP_NOP));                              // register writes clear of the
    emit(asm(OP_NOP));                              // ADD's (write-port hazard)
    emit(asm(OP_LOD,  T_INT32, 8, 5, 0, 0));        // R8 = A[t]
    emit(asm(OP_LOD,  T_INT32, 9, 5, 0, 128));      // R9 = B[t]
    emit(asm(OP_ADD,  T_FP32, 10, 8, 9));
    emit(asm(OP_MUL,  T_FP32, 11, 8, 9));
    emit(asm(OP_SUB,  T_FP32, 12, 8, 9));
    emit(asm(OP_XOR,  T_INT32, 13, 8, 9));
    emit(asm(OP_LSL,  T_INT32, 14, 5, 6));          // t << 1
    emit(asm(OP_STO,  T_INT32, 10, 5, 0, 256));
    emit(asm(OP_STO,  T_INT32, 11, 5, 0, 384));
    emit(asm(OP_STO,  T_INT32, 12, 5, 0, 512));
    emit(asm(OP_STO,  T_INT32, 13, 5, 0, 640));
    emit(asm(OP_STO,  T_INT32, 14, 5, 0, 768));
    emit(asm(OP_DOT,  T_FP32, 15, 8, 9));           // lane 0: <A,B> per wavefront
    emit(asm(OP_SUM,  T_FP32, 3, 8, 9));            // lane 0: sum of A per wavefront
    emit(asm(OP_NOP));                              // SUM results still arriving in lane 0
    emit(asm(OP_INVSQR, T_FP32, 4, 8));             // lane 0: 1/sqrt(A)
    emit(asm(OP_STO,  T_INT32, 15, 2, 0, 896, 3));  // single thread per wavefront
    emit(asm(OP_STO,  T_INT32, 3, 2, 0, 904, 3));
    emit(asm(OP_STO,  T_INT32, 4, 2, 0, 912, 3));
    // thread snooping: thread 0 adds the dot products of wavefronts 1 and 2
    emit(asm(OP_ADD,  T_FP32, 0, 15, 15, (1 << 10) | (2 << 5), 3, 3, 1));
    emit(asm(OP_INIT, T_INT32, 0, 0, 0, 3));
    emit(asm(OP_ADD,  T_INT32, 7, 7, 6));           // loop body: R7 += 1
    emit(asm(OP_LOOP, T_INT32, 0, 0, 0, 32));
    emit(asm(OP_STO,  T_INT32, 0, 2, 0, 920, 3, 3));// thread 0 only
    for (int i = 0; i < 5; i++) emit(asm(OP_NOP));  // loop's ADD results still arriving
    emit(asm(OP_LODI, T_INT32, 13, 0, 0, 5, 0, 1)); // half depth
    emit(asm(OP_LODI, T_INT32, 12, 0, 0, 7, 1, 0)); // half width
    emit(asm(OP_JSR,  T_INT32, 0, 0, 0, SUB_ADDR));
    emit(asm(OP_STO,  T_INT32, 7, 5, 0, 1024));
    emit(asm(OP_STO,  T_INT32, 13, 5, 0, 1152));
    emit(asm(OP_STO,  T_INT32, 12, 5, 0, 1280));
    emit(asm(OP_STO,  T_INT32, 14, 5, 0, 1408));
    emit(asm(OP_STOP));
    // subroutine
    emit(asm(OP_LSR,  T_UINT32, 14, 14, 6));        // (t << 1) >> 1
    emit(asm(OP_NOP));
    emit(asm(OP_RTS));
  endtask

  // cycles the program should take, from the sequencer's stepping rules
  function automatic int expected_cycles();
    int pc = 0, n = 0, ctr = 0, stack[$];
    iword_t w;
    int width, depth, steps;
    for (int guard = 0; guard < 1000; guard++) begin
      w = iword_t'(prog[pc]);
      width = (w.var_w == 0) ? 16 : (w.var_w == 1) ? 8 : (w.var_w == 2) ? 4 : 1;
      depth = (w.var_d == 0) ? NWF : (w.var_d == 1) ? NWF / 2 : (w.var_d == 2) ? NWF / 4 : 1;
      case (opcode_e'(w.opcode))
        OP_LOD:  steps = depth * ((width + 3) / 4);
        OP_STO:  steps = depth * width;
        OP_NOP, OP_JMP, OP_JSR, OP_RTS, OP_LOOP, OP_INIT, OP_STOP: steps = 1;
        default: steps = depth;
      endcase
      n += steps;
      case (opcode_e'(w.opcode))
        OP_STOP: return n;
        OP_JMP:  pc = int'(w.imm);
        OP_JSR:  begin stack.push_back(pc + 1); pc = int'(w.imm); end
        OP_RTS:  pc = stack.pop_back();
        OP_INIT: begin ctr = int'(w.imm); pc++; end
        OP_LOOP: if (ctr > 1) begin ctr--; pc = int'(w.imm); end else begin ctr = 0; pc++; end
        default: pc++;
      endcase
    end
    return -1;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_fp, n_int, n_load, n_store, n_imm, n_tid, n_dot, n_sum, n_sfu, n_snoop;
  int n_loop_taken, n_jsr, n_rts, n_nop, n_narrow_w, n_narrow_d, n_stop, n_lane0_ext;
  always @(posedge clk) if (rst_n) begin
    if (dut.running && dut.last) begin
      if (dut.dec.fp_op)  n_fp++;
      if (dut.dec.int_op) n_int++;
      if (dut.dec.load)   n_load++;
      if (dut.dec.store)  n_store++;
      if (dut.dec.imm_en) n_imm++;
      if (dut.dec.tid_en) n_tid++;
      if (dut.dec.dot && !dut.dec.sum) n_dot++;
      if (dut.dec.sum)    n_sum++;
      if (dut.dec.sfu)    n_sfu++;
      if (dut.dec.x)      n_snoop++;
      if (dut.dec.op == OP_LOOP && dut.loop_ctr > 1) n_loop_taken++;
      if (dut.dec.op == OP_JSR) n_jsr++;
      if (dut.dec.op == OP_RTS) n_rts++;
      if (dut.dec.op == OP_NOP) n_nop++;
      if (!dut.dec.is_ctrl && dut.dec.var_w != 0) n_narrow_w++;
      if (!dut.dec.is_ctrl && dut.dec.var_d != 0) n_narrow_d++;
      if (dut.dec.op == OP_STOP) n_stop++;
    end
    if (dut.x_we) n_lane0_ext++;
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end else $display("  %-22s %0d", what, n);
  endtask

  // ---------------- host helpers ----------------
  // host accesses are driven on the falling edge
  task automatic shm_write(input int a, input logic [31:0] d);
    @(negedge clk);
    shm_addr = 11'(a); shm_wdata = d; shm_we = 1'b1;
    @(negedge clk);
    shm_we = 1'b0;
  endtask

  task automatic shm_read(input int a, output logic [31:0] d);
    @(negedge clk);
    shm_addr = 11'(a); shm_re = 1'b1;
    @(negedge clk);
    shm_re = 1'b0;
    while (!shm_rvalid) @(negedge clk);
    d = shm_rdata;
  endtask

  task automatic expect_word(input string what, input int a, input logic [31:0] exp);
    logic [31:0] got;
    shm_read(a, got);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0d: got %h expected %h", what, a, got, exp);
    end
  endtask

  logic [31:0] A [NT];
  logic [31:0] B [NT];
  logic [31:0] dotv [NWF];

  function automatic logic [31:0] tree_sum(input logic [31:0] v [16]);
    logic [31:0] t [16];
    t = v;
    for (int n = 8; n >= 1; n /= 2)
      for (int i = 0; i < n; i++) t[i] = fadd(t[2*i], t[2*i+1]);
    return t[0];
  endfunction

  initial begin
    int exp_cycles;
    logic [31:0] got;
    logic [31:0] v [16];
    start = 0; start_pc = 0; cfg_nwf = 6'(NWF); cfg_x_log2 = 4'd4;
    imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    shm_we = 0; shm_re = 0; shm_addr = 0; shm_wdata = 0;
    build_program();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < plen; i++) begin
      @(negedge clk);
      imem_waddr = 9'(i); imem_wdata = prog[i]; imem_we = 1'b1;
    end
    @(negedge clk);
    imem_we = 1'b0;
    for (int t = 0; t < NT; t++) begin
      A[t] = rand_fp(-6, 6, 1);
      B[t] = rand_fp(-6, 6);
      shm_write(t, A[t]);
      shm_write(128 + t, B[t]);
    end
    // start
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
    @(posedge clk);
    exp_cycles = expected_cycles();
    checks++;
    if (run_cycles != exp_cycles) begin
      failures++;
      $display("FAIL: program ran %0d cycles, expected %0d", run_cycles, exp_cycles);
    end else $display("program ran %0d cycles as expected", run_cycles);
    repeat (20) @(posedge clk);   // let the last stores drain

    for (int t = 0; t < NT; t++) begin
      expect_word("fadd", 256 + t, fadd(A[t], B[t]));
      expect_word("fmul", 384 + t, fmul(A[t], B[t]));
      expect_word("fsub", 512 + t, fsub(A[t], B[t]));
      expect_word("xor",  640 + t, A[t] ^ B[t]);
      expect_word("lsl",  768 + t, 32'(t << 1));
      expect_word("loop", 1024 + t, 32'd3);
      expect_word("half depth", 1152 + t, (t / 16 < NWF / 2) ? 32'd5 : (A[t] ^ B[t]));
      expect_word("half width", 1280 + t, (t % 16 < 8) ? 32'd7 : fsub(A[t], B[t]));
      expect_word("jsr lsr", 1408 + t, 32'(t));
    end
    for (int w = 0; w < NWF; w++) begin
      for (int l = 0; l < 16; l++) v[l] = fmul(A[16*w+l], B[16*w+l]);
      dotv[w] = tree_sum(v);
      expect_word("dot", 896 + w, dotv[w]);
      for (int l = 0; l < 16; l++) v[l] = A[16*w+l];
      expect_word("sum", 904 + w, tree_sum(v));
      shm_read(912 + w, got);
      checks++;
      if (rel_err(got, 1.0 / $sqrt(f2r(A[16*w]))) > 1.0e-6) begin
        failures++;
        $display("FAIL invsqr wf %0d: got %h for x=%h", w, got, A[16*w]);
      end
    end
    expect_word("snoop", 920, fadd(dotv[1], dotv[2]));
    // the shared memory below the results is untouched by the program
    expect_word("input kept", 5, A[5]);

    $display("mechanisms:");
    need("FP32 operation", n_fp);
    need("INT operation", n_int);
    need("indexed load", n_load);
    need("indexed store", n_store);
    need("immediate load", n_imm);
    need("thread ID", n_tid);
    need("dot product", n_dot);
    need("reduction (SUM)", n_sum);
    need("SFU INVSQR", n_sfu);
    need("lane-0 write dot/SFU", n_lane0_ext);
    need("thread snooping", n_snoop);
    need("loop taken", n_loop_taken);
    need("JSR", n_jsr);
    need("RTS", n_rts);
    need("NOP", n_nop);
    need("narrowed width", n_narrow_w);
    need("narrowed depth", n_narrow_d);
    need("STOP", n_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
