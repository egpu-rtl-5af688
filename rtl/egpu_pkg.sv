// egpu_pkg: shared constants and types of the eGPU streaming multiprocessor.
//
// The SM runs up to 512 threads as up to 32 wavefronts of 16 lanes (one lane
// per scalar processor, SP).  Every thread owns 16 registers of 32 bits, so
// one SP holds 32 x 16 = 512 words and a register address is
// {wavefront[4:0], register[3:0]}.  Instructions are 40 bits wide and split
// into the eight fields of the I-word: Variable(4) Opcode(6) Type(2) RD(4)
// RA(4) RB(4) X(1) Immediate(15).  The field widths and their order are the
// paper's; it numbers the word [40:1], this RTL numbers it [39:0], so paper
// bit n is RTL bit n-1.  The opcode and type encodings, the place of the two
// thread-snooping sub-fields inside the immediate and the pipeline latencies
// below are choices of this design (the paper gives none of them).
package egpu_pkg;

  localparam int LANES      = 16;   // SPs per SM
  localparam int NREGS      = 16;   // registers per thread
  localparam int MAX_WF     = 32;   // wavefronts per thread block
  localparam int WF_W       = 5;    // wavefront index width
  localparam int RF_AW      = 9;    // register address width (512 words)
  localparam int IW         = 40;   // instruction word width
  localparam int SHM_PORTS  = 4;    // shared memory read ports

  // Pipeline latencies, in cycles.  The SP writes an ALU result 9 cycles
  // after the control word reaches it (the paper's pipeline depth of 9).
  localparam int ALU_LAT    = 4;    // FP ALU and INT ALU, inputs to result
  localparam int DOT_LAT    = 5;    // dot product: multiply + 4 adder levels
  localparam int SFU_LAT    = 4;    // inverse square root: seed + 3 Newton steps

  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

  typedef enum logic [5:0] {
    OP_NOP    = 6'd0,
    OP_ADD    = 6'd1,
    OP_SUB    = 6'd2,
    OP_MUL    = 6'd3,
    OP_AND    = 6'd4,
    OP_OR     = 6'd5,
    OP_XOR    = 6'd6,
    OP_NOT    = 6'd7,
    OP_LSL    = 6'd8,
    OP_LSR    = 6'd9,
    OP_LOD    = 6'd10,  // LOD Rd,(Ra)+offset  indexed load from shared memory
    OP_STO    = 6'd11,  // STO Rd,(Ra)+offset  indexed store to shared memory
    OP_LODI   = 6'd12,  // LOD Rd,#Imm
    OP_TDX    = 6'd13,
    OP_TDY    = 6'd14,
    OP_DOT    = 6'd15,
    OP_SUM    = 6'd16,
    OP_INVSQR = 6'd17,
    OP_JMP    = 6'd18,
    OP_JSR    = 6'd19,
    OP_RTS    = 6'd20,
    OP_LOOP   = 6'd21,
    OP_INIT   = 6'd22,
    OP_STOP   = 6'd23
  } opcode_e;

  typedef enum logic [1:0] {
    T_INT32  = 2'd0,
    T_UINT32 = 2'd1,
    T_FP32   = 2'd2
  } num_type_e;

  // The I-word, most significant field first (Fig. 3 of the paper).
  typedef struct packed {
    logic [1:0]  var_w;   // wavefront width: full, 1/2, 1/4, single thread
    logic [1:0]  var_d;   // block depth: full, 1/2, 1/4, single wavefront
    logic [5:0]  opcode;
    logic [1:0]  typ;
    logic [3:0]  rd;
    logic [3:0]  ra;
    logic [3:0]  rb;
    logic        x;       // thread snooping
    logic [14:0] imm;     // sign-extended immediate / offset / address
  } iword_t;

  // How the sequencer steps an instruction.
  typedef enum logic [2:0] {
    C_CTRL  = 3'd0,  // single cycle, nothing sent to the SPs
    C_WAVE  = 3'd1,  // one cycle per wavefront
    C_LOAD  = 3'd2,  // one cycle per four threads
    C_STORE = 3'd3   // one cycle per thread
  } seq_class_e;

  typedef struct packed {
    opcode_e     op;
    num_type_e   typ;
    seq_class_e  cls;
    logic        fp_op;     // FP ALU writes Rd
    logic        int_op;    // INT ALU writes Rd
    logic        load;      // indexed load
    logic        store;     // indexed store
    logic        imm_en;    // Rd = immediate
    logic        tid_en;    // Rd = thread ID
    logic        tid_y;     // thread ID y instead of x
    logic        dot;       // dot product / sum
    logic        sum;       // reduction (multiplier operand forced to 1.0)
    logic        sfu;       // inverse square root
    logic        is_ctrl;
    logic        stop;
    logic [1:0]  var_w;
    logic [1:0]  var_d;
    logic [3:0]  rd;
    logic [3:0]  ra;
    logic [3:0]  rb;
    logic        x;
    logic [14:0] imm15;
    logic [31:0] imm;       // sign-extended immediate
  } decoded_t;

  // Control word broadcast by the output block to every SP in one cycle.
  typedef struct packed {
    opcode_e          op;
    num_type_e        typ;
    logic             fp_op;
    logic             int_op;
    logic             load;
    logic             store;
    logic             imm_en;
    logic             tid_en;
    logic             dot;
    logic             sum;
    logic             sfu;
    logic [RF_AW-1:0] ra_addr;
    logic [RF_AW-1:0] rb_addr;
    logic [RF_AW-1:0] wa;
    logic [31:0]      imm;
  } sp_ctl_t;

endpackage
