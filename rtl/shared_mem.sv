// shared_mem: the SM's shared memory, four read ports and one write port.
//
// As in the paper, the four read ports are four identical copies of the
// memory, all written through the single write port; the global (external)
// port reads and writes one 32-bit word at a time.  Every address is a word
// address; the instruction's offset is added here to the lane addresses.
// Timing: an internal read address in cycle t gives data in cycle t+2 (address
// register, then a registered memory read, like a block RAM with an output
// register); an internal write in cycle t is in the memory at the end of
// cycle t+1.  External access, a choice of this design: the external port uses
// the write port and read copy 0 in a cycle when the SM does not (ext_ready
// high); the host must only access when ext_ready is high, otherwise the
// access is ignored.  ext_rvalid pulses three cycles after ext_re; ext_rdata
// then holds the word until the next external read.
// Depth: 2048 words by default, see the parameter's comment.
module shared_mem
  import egpu_pkg::*;
#(
  // 2048 words: 16 M20Ks (48 for the SM less 32 for the register files)
  // shared by four copies of 512 x 32 x 4.
  parameter int DEPTH = 2048,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] offset,
  input  logic        rd_valid [SHM_PORTS],
  input  logic [31:0] rd_addr  [SHM_PORTS],
  output logic [31:0] rd_data  [SHM_PORTS],
  input  logic        wr_valid,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data,
  input  logic        ext_we,
  input  logic        ext_re,
  input  logic [AW-1:0] ext_addr,
  input  logic [31:0] ext_wdata,
  output logic        ext_ready,
  output logic [31:0] ext_rdata,
  output logic        ext_rvalid
);
  logic [31:0]   mem [SHM_PORTS][DEPTH];
  logic [AW-1:0] raddr_q [SHM_PORTS];
  logic [AW-1:0] waddr_q;
  logic [31:0]   wdata_q;
  logic          we_q;
  logic          ext_rd_q, ext_rd_q2;

  assign ext_ready = !rd_valid[0] && !wr_valid;

  always_ff @(posedge clk) begin
    for (int p = 0; p < SHM_PORTS; p++)
      raddr_q[p] <= AW'(rd_addr[p] + offset);
    if (ext_ready && ext_re) raddr_q[0] <= ext_addr;
    if (wr_valid) begin
      waddr_q <= AW'(wr_addr + offset);
      wdata_q <= wr_data;
    end else begin
      waddr_q <= ext_addr;
      wdata_q <= ext_wdata;
    end
    for (int p = 0; p < SHM_PORTS; p++) begin
      if (we_q) mem[p][waddr_q] <= wdata_q;
      rd_data[p] <= mem[p][raddr_q[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we_q      <= 1'b0;
      ext_rd_q  <= 1'b0;
      ext_rd_q2 <= 1'b0;
    end else begin
      we_q      <= wr_valid | (ext_ready & ext_we);
      ext_rd_q  <= ext_ready & ext_re;
      ext_rd_q2 <= ext_rd_q;
    end
  end

  // the external read word is held until the next external read
  always_ff @(posedge clk) begin
    if (ext_rd_q2) ext_rdata <= rd_data[0];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ext_rvalid <= 1'b0;
    else        ext_rvalid <= ext_rd_q2;
  end
endmodule
