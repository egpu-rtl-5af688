// sp: scalar processor, one of the 16 lanes of the SM.
//
// Structure (after the paper's SP figure): two register-file copies share one
// write port and give the two read ports aa and bb; the read data go to the
// FP ALU, the INT ALU and out of the SP (data_out_aa/bb) for shared-memory
// addresses, store data and the dot product.  Three small pipelines bring the
// write data, the write address and the write enable to the register file:
//   * data input: a first multiplexer picks immediate, shared-memory load data
//     or thread ID and registers it; a second multiplexer picks that or the
//     ALU result and registers it into the register file's data port;
//   * write address: the issued Rd address is used directly (immediate, thread
//     ID), delayed to meet the load data, or delayed to meet the ALU result;
//   * write enable: shared_en (delayed), immediate_en and thread-ID_en are
//     ORed; fp_op/int_op are ORed and delayed; the two are ORed.
// The first lane (HAS_EXT=1) has one more write source, the dot-product and
// SFU results; in this design it sits at the second multiplexer below the ALU.
//
// Timing, counted from cycle 0 when the control word is at the SP's input:
//   cycle 1  data_out_aa / data_out_bb valid
//   cycle 3  shared_data expected for a load issued in cycle 0
//   end of cycle 2  immediate / thread-ID write
//   end of cycle 5  load write
//   end of cycle 8  ALU write: a dependent instruction may read from cycle 9
// (the pipeline depth of 9 the paper gives for INT and FP operations).  There
// are no interlocks: two writes reaching the register file in the same cycle
// are a hazard the program must avoid; the ALU result then wins, the dot/SFU
// result next.  The exact stage boundaries are this design's.
module sp
  import egpu_pkg::*;
#(
  parameter bit HAS_EXT = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  sp_ctl_t          ctl,
  input  logic             lane_en,
  input  logic [31:0]      tid,
  input  logic [31:0]      shared_data,
  input  logic             ext_we,
  input  logic [RF_AW-1:0] ext_wa,
  input  logic [31:0]      ext_wd,
  output logic [31:0]      data_out_aa,
  output logic [31:0]      data_out_bb
);
  localparam int LD_DLY  = 3;            // control to shared_data
  localparam int ALU_DLY = 3 + ALU_LAT;  // control to registered ALU result

  // register file write port
  logic             wr_we;
  logic [RF_AW-1:0] wr_wa;
  logic [31:0]      wr_wd;

  regfile #(.DEPTH(1 << RF_AW), .WIDTH(32)) u_rf_aa (
    .clk, .we(wr_we), .wa(wr_wa), .wd(wr_wd), .ra(ctl.ra_addr), .rd(data_out_aa));
  regfile #(.DEPTH(1 << RF_AW), .WIDTH(32)) u_rf_bb (
    .clk, .we(wr_we), .wa(wr_wa), .wd(wr_wd), .ra(ctl.rb_addr), .rd(data_out_bb));

  // gated enables of the issued control word
  logic fp0, int0, ld0, imm0, tid0;
  assign fp0  = lane_en & ctl.fp_op;
  assign int0 = lane_en & ctl.int_op;
  assign ld0  = lane_en & ctl.load;
  assign imm0 = lane_en & ctl.imm_en;
  assign tid0 = lane_en & ctl.tid_en;

  // write address delay line and enable delay lines
  logic [RF_AW-1:0] wa_d [ALU_DLY+1];
  logic [ALU_DLY:1] alu_we_d;
  logic [LD_DLY:1]  ld_d;
  assign wa_d[0] = ctl.wa;

  always_ff @(posedge clk) begin
    for (int i = 1; i <= ALU_DLY; i++) wa_d[i] <= wa_d[i-1];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alu_we_d <= '0;
      ld_d     <= '0;
    end else begin
      alu_we_d <= {alu_we_d[ALU_DLY-1:1], fp0 | int0};
      ld_d     <= {ld_d[LD_DLY-1:1], ld0};
    end
  end

  // ALU operand registers (cycle 2)
  opcode_e     op1, op2;
  num_type_e   typ1, typ2;
  logic        fpv1, intv1, fpv2, intv2;
  logic [31:0] a2, b2;
  always_ff @(posedge clk) begin
    op1  <= ctl.op;  typ1 <= ctl.typ;
    op2  <= op1;     typ2 <= typ1;
    a2   <= data_out_aa;
    b2   <= data_out_bb;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {fpv1, intv1, fpv2, intv2} <= '0;
    else begin
      fpv1 <= fp0;  intv1 <= int0;
      fpv2 <= fpv1; intv2 <= intv1;
    end
  end

  logic        fp_v, int_v;
  logic [31:0] fp_r, int_r;
  fp_alu  u_fp  (.clk, .rst_n, .in_valid(fpv2),  .op(op2), .a(a2), .b(b2),
                 .out_valid(fp_v), .result(fp_r));
  int_alu u_int (.clk, .rst_n, .in_valid(intv2), .op(op2), .typ(typ2), .a(a2), .b(b2),
                 .out_valid(int_v), .result(int_r));

  // ALU result multiplexer (cycle 7)
  logic [31:0] alu_q;
  always_ff @(posedge clk) alu_q <= fp_v ? fp_r : int_r;

  // data input multiplexer, first stage
  logic             din_we;
  logic [RF_AW-1:0] din_wa;
  logic [31:0]      din_wd;
  always_ff @(posedge clk) begin
    if (ld_d[LD_DLY]) begin
      din_wd <= shared_data;
      din_wa <= wa_d[LD_DLY];
    end else begin
      din_wd <= imm0 ? ctl.imm : tid;
      din_wa <= wa_d[0];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) din_we <= 1'b0;
    else        din_we <= ld_d[LD_DLY] | imm0 | tid0;
  end

  // second stage: ALU result, dot/SFU result (first lane) or data input
  logic ext_sel;
  assign ext_sel = HAS_EXT && ext_we;
  always_ff @(posedge clk) begin
    if (alu_we_d[ALU_DLY]) begin
      wr_wd <= alu_q;
      wr_wa <= wa_d[ALU_DLY];
    end else if (ext_sel) begin
      wr_wd <= ext_wd;
      wr_wa <= ext_wa;
    end else begin
      wr_wd <= din_wd;
      wr_wa <= din_wa;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_we <= 1'b0;
    else        wr_we <= alu_we_d[ALU_DLY] | ext_sel | din_we;
  end
endmodule
