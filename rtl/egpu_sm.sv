// egpu_sm: one eGPU streaming multiprocessor (SM), the top of the design.
//
// A SIMT machine of 16 scalar processors (SPs) that runs up to 512 threads as
// up to 32 wavefronts of 16.  The instruction section (fetch with zero-overhead
// loops, I-MEM, decoder, sequencer, thread generator and output block) issues
// one wavefront (or, for loads, four threads; for stores, one thread) per
// cycle to all SPs at once.  The SPs read and write a four-read-port,
// one-write-port shared memory through a 16:4 read address multiplexer and
// 16:1 write address/data multiplexers.  A dot-product core and an inverse
// square root unit read the SPs' operands and write into the first lane.
// There are no hardware interlocks: hazards are the program's to avoid.
//
// External agent interface (the agent itself is not part of the SM):
//   imem_*     write the instruction memory, at any time;
//   shm_*      one-word global port into the shared memory (see shared_mem:
//              accesses are taken only while shm_ready is high);
//   cfg_nwf    wavefronts in the thread block (1..32), cfg_x_log2 the
//              log2 of the 2D thread space's row length; hold while running;
//   start      with start_pc, begins execution; running is high until a STOP
//              instruction, which sets done.
// Timing of one wavefront through the pipeline, cycle 0 being the sequencer's
// issue: control at the SPs in cycle 1, register reads in cycle 2, shared
// memory address in 3, load data in 4, ALU result written at the end of
// cycle 9.  All parameter defaults are the main configuration of the design.
module egpu_sm
  import egpu_pkg::*;
#(
  parameter int IMEM_DEPTH = 512,
  parameter int SHM_DEPTH  = 2048,
  parameter int RS_DEPTH   = 4,
  localparam int IAW = $clog2(IMEM_DEPTH),
  localparam int SAW = $clog2(SHM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // control
  input  logic           start,
  input  logic [IAW-1:0] start_pc,
  input  logic [5:0]     cfg_nwf,
  input  logic [3:0]     cfg_x_log2,
  output logic           running,
  output logic           done,
  // instruction memory load port
  input  logic           imem_we,
  input  logic [IAW-1:0] imem_waddr,
  input  logic [IW-1:0]  imem_wdata,
  // shared memory global port
  input  logic           shm_we,
  input  logic           shm_re,
  input  logic [SAW-1:0] shm_addr,
  input  logic [31:0]    shm_wdata,
  output logic           shm_ready,
  output logic [31:0]    shm_rdata,
  output logic           shm_rvalid
);
  // ---------------- instruction section ----------------
  logic [IAW-1:0]   pc, imem_raddr;
  logic [IW-1:0]    iword;
  decoded_t         dec;
  logic             issue, last;
  logic [WF_W-1:0]  wf;
  logic [LANES-1:0] lane_mask;
  logic [15:0]      loop_ctr;
  logic [31:0]      tdx [LANES];
  logic [31:0]      tdy [LANES];

  instr_fetch #(.AW(IAW), .RS_DEPTH(RS_DEPTH)) u_fetch (
    .clk, .rst_n, .start, .start_pc, .dec, .advance(last),
    .running, .done, .pc, .imem_raddr, .loop_ctr);

  imem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(imem_raddr), .rdata(iword));

  decoder u_dec (.iword, .dec);

  sequencer u_seq (
    .clk, .rst_n, .valid(running), .dec, .cfg_nwf,
    .issue, .wf, .lane_mask, .last);

  thread_gen u_tgen (.wf, .cfg_x_log2, .tdx, .tdy);

  sp_ctl_t          ctl;
  logic [LANES-1:0] lane_en;
  logic [31:0]      tid [LANES];

  output_block u_out (
    .clk, .rst_n, .issue, .dec, .wf, .lane_mask, .tdx, .tdy,
    .ctl, .lane_en, .tid);

  // ---------------- SPs ----------------
  logic [31:0] aa [LANES];
  logic [31:0] bb [LANES];
  logic [31:0] shm_rd [SHM_PORTS];
  logic             x_we;
  logic [RF_AW-1:0] x_wa;
  logic [31:0]      x_wd;

  for (genvar l = 0; l < LANES; l++) begin : g_sp
    sp #(.HAS_EXT(l == 0)) u_sp (
      .clk, .rst_n, .ctl, .lane_en(lane_en[l]), .tid(tid[l]),
      .shared_data(shm_rd[l % SHM_PORTS]),
      .ext_we(l == 0 ? x_we : 1'b0), .ext_wa(x_wa), .ext_wd(x_wd),
      .data_out_aa(aa[l]), .data_out_bb(bb[l]));
  end

  // control aligned with the SPs' register outputs
  sp_ctl_t          ctl1;
  logic [LANES-1:0] lane1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl1  <= '0;
      lane1 <= '0;
    end else begin
      ctl1  <= ctl;
      lane1 <= lane_en;
    end
  end

  // ---------------- shared memory and its multiplexers ----------------
  logic             prt_v [SHM_PORTS];
  logic [31:0]      prt_a [SHM_PORTS];
  logic             st_v;
  logic [31:0]      st_a, st_d;

  rd_addr_mux u_rmux (
    .lane_valid(lane1 & {LANES{ctl1.load}}), .lane_addr(aa),
    .port_valid(prt_v), .port_addr(prt_a));

  wr_mux u_wmux (
    .lane_valid(lane1 & {LANES{ctl1.store}}), .lane_addr(aa), .lane_data(bb),
    .wr_valid(st_v), .wr_addr(st_a), .wr_data(st_d));

  shared_mem #(.DEPTH(SHM_DEPTH)) u_shm (
    .clk, .rst_n, .offset(ctl1.imm),
    .rd_valid(prt_v), .rd_addr(prt_a), .rd_data(shm_rd),
    .wr_valid(st_v), .wr_addr(st_a), .wr_data(st_d),
    .ext_we(shm_we), .ext_re(shm_re), .ext_addr(shm_addr), .ext_wdata(shm_wdata),
    .ext_ready(shm_ready), .ext_rdata(shm_rdata), .ext_rvalid(shm_rvalid));

  // ---------------- dot product and SFU, writing into the first lane ----------------
  logic             dot_v, sfu_v;
  logic [31:0]      dot_r, sfu_r;
  logic [RF_AW-1:0] dot_t, sfu_t;

  dot_product #(.N(LANES)) u_dot (
    .clk, .rst_n, .in_valid(ctl1.dot && (|lane1)), .sum_mode(ctl1.sum),
    .lane_en(lane1), .a(aa), .b(bb), .in_tag(ctl1.wa),
    .out_valid(dot_v), .result(dot_r), .out_tag(dot_t));

  sfu_invsqrt u_sfu (
    .clk, .rst_n, .in_valid(ctl1.sfu && lane1[0]), .x(aa[0]), .in_tag(ctl1.wa),
    .out_valid(sfu_v), .result(sfu_r), .out_tag(sfu_t));

  assign x_we = dot_v | sfu_v;

  // ---------------- rules of the shared-memory ports ----------------
  // a store drives the write port from one lane at a time
  a_one_store: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(lane1 & {LANES{ctl1.store}}))
    else $error("egpu_sm: more than one lane stores in a cycle");
  // a load phase uses each read port for at most one lane
  for (genvar j = 0; j < SHM_PORTS; j++) begin : g_port_chk
    a_one_load: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({lane1[j + 12], lane1[j + 8], lane1[j + 4], lane1[j]} & {4{ctl1.load}}))
      else $error("egpu_sm: two lanes on shared-memory read port %0d", j);
  end
  assign x_wa = dot_v ? dot_t : sfu_t;
  assign x_wd = dot_v ? dot_r : sfu_r;
endmodule
