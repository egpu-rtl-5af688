// decoder: splits a 40-bit I-word into its fields and classifies the opcode.
//
// Fields, most significant first: Variable[39:36] (width [39:38], depth
// [37:36]), Opcode[35:30], Type[29:28], RD[27:24], RA[23:20], RB[19:16],
// X[15], Immediate[14:0] (the paper's bits [40:1] less one).  The immediate is
// sign-extended to 32 bits.  The class tells the sequencer how to step the
// instruction: operations, immediates, thread IDs, DOT/SUM and INVSQR take one
// cycle per wavefront, indexed loads one per four threads, stores one per
// thread, and control instructions a single cycle.  The opcode numbers are this
// design's (see egpu_pkg).  NOP (used by programs to space out hazards) and
// any undefined opcode take a single cycle and do nothing.
// Combinational.
module decoder
  import egpu_pkg::*;
(
  input  logic [IW-1:0] iword,
  output decoded_t      dec
);
  iword_t w;
  assign w = iword_t'(iword);

  always_comb begin
    dec        = '0;
    dec.var_w  = w.var_w;
    dec.var_d  = w.var_d;
    dec.rd     = w.rd;
    dec.ra     = w.ra;
    dec.rb     = w.rb;
    dec.x      = w.x;
    dec.imm15  = w.imm;
    dec.imm    = {{17{w.imm[14]}}, w.imm};
    dec.typ    = (w.typ == 2'd3) ? T_INT32 : num_type_e'(w.typ);
    dec.op     = OP_NOP;
    dec.cls    = C_WAVE;
    case (w.opcode)
      OP_ADD, OP_SUB, OP_MUL: begin
        dec.op     = opcode_e'(w.opcode);
        dec.fp_op  = (w.typ == T_FP32);
        dec.int_op = (w.typ != T_FP32);
      end
      OP_AND, OP_OR, OP_XOR, OP_NOT, OP_LSL, OP_LSR: begin
        dec.op     = opcode_e'(w.opcode);
        dec.int_op = 1'b1;
      end
      OP_LOD:    begin dec.op = OP_LOD;  dec.load = 1'b1;  dec.cls = C_LOAD;  end
      OP_STO:    begin dec.op = OP_STO;  dec.store = 1'b1; dec.cls = C_STORE; end
      OP_LODI:   begin dec.op = OP_LODI; dec.imm_en = 1'b1; end
      OP_TDX:    begin dec.op = OP_TDX;  dec.tid_en = 1'b1; end
      OP_TDY:    begin dec.op = OP_TDY;  dec.tid_en = 1'b1; dec.tid_y = 1'b1; end
      OP_DOT:    begin dec.op = OP_DOT;  dec.dot = 1'b1; end
      OP_SUM:    begin dec.op = OP_SUM;  dec.dot = 1'b1; dec.sum = 1'b1; end
      OP_INVSQR: begin dec.op = OP_INVSQR; dec.sfu = 1'b1; end
      OP_JMP, OP_JSR, OP_RTS, OP_LOOP, OP_INIT, OP_STOP: begin
        dec.op      = opcode_e'(w.opcode);
        dec.is_ctrl = 1'b1;
        dec.cls     = C_CTRL;
        dec.stop    = (w.opcode == OP_STOP);
      end
      default: begin  // NOP and undefined opcodes: one cycle, no effect
        dec.op      = OP_NOP;
        dec.is_ctrl = 1'b1;
        dec.cls     = C_CTRL;
      end
    endcase
  end
endmodule
