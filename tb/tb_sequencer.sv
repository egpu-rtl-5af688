// tb_sequencer: unit test of the sequencer's stepping of the thread block.
//
// For every class (operation, load, store, control), every Variable width
// and depth and several thread-block sizes, runs one instruction and checks
// cycle by cycle the issued wavefront, the lane mask and the last flag
// against a reference sequence: operations one cycle per wavefront with
// lanes 0..W-1, loads four lanes per cycle, stores one lane per cycle,
// control instructions one cycle with nothing issued.  The cycle counts are
// those the paper gives (e.g. 32 cycles to load and 128 to store a
// 128-thread block).
module tb_sequencer;
  import egpu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        valid, issue, last;
  decoded_t    dec;
  logic [5:0]  cfg_nwf;
  logic [4:0]  wf;
  logic [15:0] lane_mask;

  sequencer dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input seq_class_e cls, input int vw, input int vd, input int nwf);
    int width, depth, steps, n;
    int exp_wf [$];
    logic [15:0] exp_mask [$];
    width = (vw == 0) ? 16 : (vw == 1) ? 8 : (vw == 2) ? 4 : 1;
    depth = (vd == 0) ? nwf : (vd == 1) ? nwf / 2 : (vd == 2) ? nwf / 4 : 1;
    if (depth < 1) depth = 1;
    if (cls == C_CTRL) begin
      exp_wf.push_back(0); exp_mask.push_back(16'h0);
    end else begin
      for (int w = 0; w < depth; w++) begin
        case (cls)
          C_LOAD:  for (int p = 0; p < (width + 3) / 4; p++) begin
                     logic [15:0] m;
                     m = 0;
                     for (int l = 4 * p; l < 4 * p + 4; l++) if (l < width) m[l] = 1;
                     exp_wf.push_back(w); exp_mask.push_back(m);
                   end
          C_STORE: for (int l = 0; l < width; l++) begin
                     exp_wf.push_back(w); exp_mask.push_back(16'h1 << l);
                   end
          default: begin
                     exp_wf.push_back(w); exp_mask.push_back(16'((17'h1 << width) - 1));
                   end
        endcase
      end
    end
    steps = exp_wf.size();
    @(negedge clk);
    dec = '0; dec.cls = cls; dec.var_w = 2'(vw); dec.var_d = 2'(vd); dec.is_ctrl = (cls == C_CTRL);
    cfg_nwf = 6'(nwf); valid = 1;
    n = 0;
    forever begin
      #1;
      checks++;
      if (n >= steps || (cls != C_CTRL && (!issue || wf != 5'(exp_wf[n]))) ||
          lane_mask !== exp_mask[n] || last !== (n == steps - 1)) begin
        failures++;
        if (failures < 10) $display("FAIL cls %0d w%0d d%0d nwf %0d step %0d: issue %b wf %0d mask %h last %b",
                                    cls, vw, vd, nwf, n, issue, wf, lane_mask, last);
        break;
      end
      n++;
      if (last) break;
      @(negedge clk);
    end
    @(negedge clk);
    valid = 0;
  endtask

  initial begin
    int sizes [5] = '{32, 8, 5, 2, 1};
    valid = 0; dec = '0; cfg_nwf = 32;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4; c++)
      for (int vw = 0; vw < 4; vw++)
        for (int vd = 0; vd < 4; vd++)
          foreach (sizes[s]) run_one(seq_class_e'(c), vw, vd, sizes[s]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
