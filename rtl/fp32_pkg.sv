// fp32_pkg: combinational IEEE754 single-precision multiply and add.
//
// These functions are the arithmetic of the FP ALU, the dot product core and
// the inverse-square-root unit.  On the FPGA the paper maps this arithmetic
// onto the hard FP32 multiply-add of the DSP Blocks; here it is written in
// logic.  Choices of this design: round to nearest even; subnormal inputs and
// results are flushed to zero; an overflow gives infinity; any NaN operand,
// inf*0 and inf-inf give the quiet NaN 7fc00000.
package fp32_pkg;

  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic [22:0] m;
    logic        g, st, inc;
    logic signed [10:0] e;
    logic [23:0] mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0))
      return QNAN;
    if (ea == 8'hff || eb == 8'hff) begin
      if (ea == 8'h00 || eb == 8'h00) return QNAN;   // inf * 0
      return {s, 8'hff, 23'h0};
    end
    if (ea == 8'h00 || eb == 8'h00) return {s, 31'h0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m  = p[46:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = p[45:23];
      g  = p[22];
      st = |p[21:0];
    end
    inc = g & (st | m[0]);
    mr  = {1'b0, m} + 24'(inc);
    if (mr[23]) e = e + 11'sd1;
    if (e >= 11'sd255) return {s, 8'hff, 23'h0};
    if (e <= 11'sd0)   return {s, 31'h0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a_in, input logic [31:0] b_in);
    logic [31:0] a, b;
    logic [7:0]  ea, eb, d;
    logic [26:0] ma, mb, mbs;
    logic        sticky;
    logic [27:0] sum;
    logic [26:0] n;
    logic [4:0]  lz;
    logic signed [10:0] e;
    logic [24:0] mr;
    logic        inc;
    logic        a_nan, b_nan, a_inf, b_inf;
    a_nan = (a_in[30:23] == 8'hff) && (a_in[22:0] != 0);
    b_nan = (b_in[30:23] == 8'hff) && (b_in[22:0] != 0);
    a_inf = (a_in[30:23] == 8'hff) && (a_in[22:0] == 0);
    b_inf = (b_in[30:23] == 8'hff) && (b_in[22:0] == 0);
    if (a_nan || b_nan) return QNAN;
    if (a_inf && b_inf) return (a_in[31] == b_in[31]) ? a_in : QNAN;
    if (a_inf) return a_in;
    if (b_inf) return b_in;
    // flush subnormals
    a = (a_in[30:23] == 8'h00) ? {a_in[31], 31'h0} : a_in;
    b = (b_in[30:23] == 8'h00) ? {b_in[31], 31'h0} : b_in;
    if (a[30:0] < b[30:0]) begin
      a = b;
      b = (a_in[30:23] == 8'h00) ? {a_in[31], 31'h0} : a_in;
    end
    if (a[30:0] == 0) return {a[31] & b[31], 31'h0};
    if (b[30:0] == 0) return a;
    ea = a[30:23];
    eb = b[30:23];
    d  = ea - eb;
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    if (d >= 8'd27) begin
      mbs    = 27'h0;
      sticky = 1'b1;
    end else begin
      mbs    = mb >> d;
      sticky = |(mb & ((27'h1 << d) - 27'h1));
    end
    mbs[0] = mbs[0] | sticky;
    e = 11'(ea);
    if (a[31] == b[31]) begin
      sum = {1'b0, ma} + {1'b0, mbs};
      if (sum[27]) begin
        n = {sum[27:2], sum[1] | sum[0]};
        e = e + 11'sd1;
      end else begin
        n = sum[26:0];
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, mbs};
      if (sum == 0) return 32'h0;
      lz = 5'd0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 5'd1;
      end
      n = sum[26:0] << lz;
      e = e - 11'(lz);
    end
    inc = n[2] & (n[1] | n[0] | n[3]);
    mr  = {1'b0, n[26:3]} + 25'(inc);
    if (mr[24]) e = e + 11'sd1;
    if (e >= 11'sd255) return {a[31], 8'hff, 23'h0};
    if (e <= 11'sd0)   return {a[31], 31'h0};
    return {a[31], e[7:0], mr[24] ? mr[23:1] : mr[22:0]};
  endfunction

endpackage
