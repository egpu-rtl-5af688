// output_block: forms and registers the control word sent to the 16 SPs.
//
// From the decoded instruction, the sequencer's wavefront and lane mask and
// the thread generator's IDs it builds the per-cycle sp_ctl_t:
//   * register addresses {wavefront, Rx}; with the X bit set (thread
//     snooping) the two source addresses take their upper five bits from
//     the immediate instead, Ra from imm[14:10] and Rb from imm[9:5] (their
//     place in the immediate is this design's), so a thread can read any
//     register of its lane;
//   * for a store the bb port reads Rd, the data to be written;
//   * enables (fp_op, int_op, load, store, immediate, thread ID, dot, SFU);
//   * the sign-extended immediate, also the load/store offset;
//   * each lane's enable and its thread ID (x or y, per instruction).
// Timing: one register stage; everything appears one cycle after the
// sequencer issues it.  With nothing issued all enables are low.
module output_block
  import egpu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             issue,
  input  decoded_t         dec,
  input  logic [WF_W-1:0]  wf,
  input  logic [LANES-1:0] lane_mask,
  input  logic [31:0]      tdx [LANES],
  input  logic [31:0]      tdy [LANES],
  output sp_ctl_t          ctl,
  output logic [LANES-1:0] lane_en,
  output logic [31:0]      tid [LANES]
);
  sp_ctl_t c;

  always_comb begin
    c         = '0;
    c.op      = dec.op;
    c.typ     = dec.typ;
    c.imm     = dec.imm;
    c.ra_addr = dec.x ? {dec.imm15[14:10], dec.ra} : {wf, dec.ra};
    c.rb_addr = dec.store ? {wf, dec.rd}
              : (dec.x ? {dec.imm15[9:5], dec.rb} : {wf, dec.rb});
    c.wa      = {wf, dec.rd};
    if (issue) begin
      c.fp_op  = dec.fp_op;
      c.int_op = dec.int_op;
      c.load   = dec.load;
      c.store  = dec.store;
      c.imm_en = dec.imm_en;
      c.tid_en = dec.tid_en;
      c.dot    = dec.dot;
      c.sum    = dec.sum;
      c.sfu    = dec.sfu;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) tid[l] <= dec.tid_y ? tdy[l] : tdx[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl     <= '0;
      lane_en <= '0;
    end else begin
      ctl     <= c;
      lane_en <= issue ? lane_mask : '0;
    end
  end
endmodule
