// instr_fetch: program counter, zero-overhead loop and subroutine control.
//
// The I-MEM read address is the next PC, computed in the same cycle, so the
// instruction word at the I-MEM output always belongs to the current PC and
// a taken jump costs no cycle.  The PC holds while the sequencer steps a
// multi-cycle instruction (advance low) and moves on when its last cycle is
// issued.  Control instructions take one cycle each:
//   JMP a   PC = a                      JSR a  push PC+1, PC = a
//   RTS     PC = pop                    INIT n loop counter = n
//   LOOP a  if counter > 1: counter-1, PC = a; else counter = 0, PC+1
//   STOP    stop and set the done flag
// The address or count is the 15-bit immediate.  With INIT n before a loop
// body ending in LOOP, the body runs n times (this count convention, the one
// loop counter and the RS_DEPTH-entry return stack are this design's; the
// paper gives only that the counter is set by one single-cycle instruction
// and decremented by another at the bottom of the loop).
// A start pulse while stopped begins execution at start_pc; the first
// instruction word is at the I-MEM output in the next cycle, when running
// rises.  start_pc must be held during the start cycle.
module instr_fetch
  import egpu_pkg::*;
#(
  parameter int AW       = 9,
  parameter int RS_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] start_pc,
  input  decoded_t      dec,
  input  logic          advance,   // last cycle of a multi-cycle instruction
  output logic          running,
  output logic          done,
  output logic [AW-1:0] pc,
  output logic [AW-1:0] imem_raddr,
  output logic [15:0]   loop_ctr
);
  localparam int SPW = $clog2(RS_DEPTH);

  logic [AW-1:0]  stack [RS_DEPTH];
  logic [SPW-1:0] sp_q;
  logic [AW-1:0]  pc_next, pc_inc, target;

  assign pc_inc = pc + AW'(1);
  assign target = AW'(dec.imm15);

  always_comb begin
    pc_next = pc;
    if (running) begin
      if (dec.is_ctrl) begin
        unique case (dec.op)
          OP_JMP, OP_JSR: pc_next = target;
          OP_RTS:         pc_next = stack[sp_q - SPW'(1)];
          OP_LOOP:        pc_next = (loop_ctr > 16'd1) ? target : pc_inc;
          OP_STOP:        pc_next = pc;
          default:        pc_next = pc_inc;
        endcase
      end else if (advance) begin
        pc_next = pc_inc;
      end
    end
  end

  assign imem_raddr = running ? pc_next : start_pc;

  always_ff @(posedge clk) begin
    if (running && dec.is_ctrl && dec.op == OP_JSR) stack[sp_q] <= pc_inc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      done     <= 1'b0;
      pc       <= '0;
      sp_q     <= '0;
      loop_ctr <= '0;
    end else if (!running) begin
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
        pc      <= start_pc;
        sp_q    <= '0;
      end
    end else begin
      pc <= pc_next;
      if (dec.is_ctrl) begin
        case (dec.op)
          OP_JSR:  sp_q <= sp_q + SPW'(1);
          OP_RTS:  sp_q <= sp_q - SPW'(1);
          OP_INIT: loop_ctr <= {1'b0, dec.imm15};
          OP_LOOP: loop_ctr <= (loop_ctr > 16'd1) ? loop_ctr - 16'd1 : 16'd0;
          OP_STOP: begin
            running <= 1'b0;
            done    <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
