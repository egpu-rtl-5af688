// sequencer: steps the current instruction over the thread block.
//
// The thread block has cfg_nwf wavefronts (1..32) of 16 threads.  The
// Variable field narrows it per instruction: var_w selects a wavefront width
// of 16, 8, 4 or 1 lanes (lanes 0..W-1), var_d a depth of all, 1/2, 1/4 of the
// wavefronts, or one (never fewer than one); the encodings 0..3 in that order
// are this design's reading of the paper's list.  Cycles per wavefront, as the
// paper gives them: one for operations, ceil(W/4) for loads (four threads per
// cycle, lanes 4p..4p+3 in phase p) and W for stores (one thread per cycle).
// Control instructions take one cycle and issue nothing.  Every cycle the
// sequencer outputs the wavefront and the lane mask to issue; last is high in
// the final cycle of the instruction, when the fetch stage moves on.
// Combinational outputs from registered counters.
module sequencer
  import egpu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,     // an instruction is present (running)
  input  decoded_t         dec,
  input  logic [5:0]       cfg_nwf,
  output logic             issue,
  output logic [WF_W-1:0]  wf,
  output logic [LANES-1:0] lane_mask,
  output logic             last
);
  logic [WF_W-1:0] wf_q;
  logic [3:0]      sub_q;
  logic [4:0]      width;
  logic [5:0]      depth, nwf;
  logic [3:0]      subs_m1;    // cycles per wavefront - 1
  logic [LANES-1:0] wmask;

  always_comb begin
    nwf = (cfg_nwf == 6'd0) ? 6'd1 : (cfg_nwf > 6'd32 ? 6'd32 : cfg_nwf);
    unique case (dec.var_w)
      2'd0: width = 5'd16;
      2'd1: width = 5'd8;
      2'd2: width = 5'd4;
      default: width = 5'd1;
    endcase
    unique case (dec.var_d)
      2'd0: depth = nwf;
      2'd1: depth = nwf >> 1;
      2'd2: depth = nwf >> 2;
      default: depth = 6'd1;
    endcase
    if (depth == 6'd0) depth = 6'd1;
    wmask = LANES'((17'h1 << width) - 17'h1);
    unique case (dec.cls)
      C_LOAD:  subs_m1 = 4'((width + 5'd3) / 5'd4 - 5'd1);
      C_STORE: subs_m1 = 4'(width - 5'd1);
      default: subs_m1 = 4'd0;
    endcase
    issue = valid && (dec.cls != C_CTRL);
    wf    = wf_q;
    unique case (dec.cls)
      C_LOAD:  lane_mask = wmask & (LANES'(16'hf) << {sub_q[1:0], 2'b00});
      C_STORE: lane_mask = LANES'(16'h1) << sub_q;
      default: lane_mask = wmask;
    endcase
    if (!issue) lane_mask = '0;
    last = valid && ((dec.cls == C_CTRL) ||
                     (sub_q == subs_m1 && 6'(wf_q) == depth - 6'd1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wf_q  <= '0;
      sub_q <= '0;
    end else if (issue) begin
      if (last) begin
        wf_q  <= '0;
        sub_q <= '0;
      end else if (sub_q == subs_m1) begin
        sub_q <= '0;
        wf_q  <= wf_q + WF_W'(1);
      end else begin
        sub_q <= sub_q + 4'd1;
      end
    end
  end
endmodule
