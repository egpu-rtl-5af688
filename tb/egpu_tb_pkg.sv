// egpu_tb_pkg: testbench helpers for the eGPU.
//
// An IEEE754 single-precision reference built on the simulator's double
// precision reals, kept independent of the RTL's arithmetic: a float is
// widened to a double exactly, the operation is done in double and the
// result rounded once to single with round-to-nearest-even.  For +, - and *
// this gives the correctly rounded single result, since a double has more
// than twice the precision of a single.  Subnormal inputs and results are
// flushed to zero, as the RTL does.  Also an assembler for 40-bit I-words
// and a random normal-float generator.
package egpu_tb_pkg;
  import egpu_pkg::*;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'h0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    logic        g, st, inc;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'h0) return {d[63], 31'h0};
    if (d[62:52] == 11'h7ff) return (d[51:0] == 0) ? {d[63], 8'hff, 23'h0} : 32'h7fc0_0000;
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    inc = g & (st | m[29]);
    mr = {1'b0, m[52:29]} + 25'(inc);
    if (mr[24]) begin
      e  = e + 1;
      mr = mr >> 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'h0};
    if (e <= 0)   return {d[63], 31'h0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] fsub(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) - f2r(b));
  endfunction
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal float with unbiased exponent in [emin, emax]
  function automatic logic [31:0] rand_fp(input int emin, input int emax, input bit pos = 0);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {pos ? 1'b0 : 1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  // assembler: fields of Fig. 3, var_w/var_d 0 = full
  function automatic logic [IW-1:0] asm(input opcode_e op, input num_type_e typ = T_INT32,
                                        input int rd = 0, input int ra = 0, input int rb = 0,
                                        input int imm = 0, input int vw = 0, input int vd = 0,
                                        input bit x = 0);
    iword_t w;
    w.var_w  = 2'(vw);
    w.var_d  = 2'(vd);
    w.opcode = op;
    w.typ    = typ;
    w.rd     = 4'(rd);
    w.ra     = 4'(ra);
    w.rb     = 4'(rb);
    w.x      = x;
    w.imm    = 15'(imm);
    return w;
  endfunction

  // relative error of a single against a real
  function automatic real rel_err(input logic [31:0] f, input real ref_v);
    real d;
    d = f2r(f) - ref_v;
    if (d < 0) d = -d;
    return (ref_v != 0.0) ? d / ((ref_v < 0) ? -ref_v : ref_v) : d;
  endfunction
endpackage
