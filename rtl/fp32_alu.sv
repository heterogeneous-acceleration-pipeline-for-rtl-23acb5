// fp32_alu: one reducer ALU lane. Adds (v_add) or multiplies (v_mul) two IEEE-754
// single-precision numbers, since the design trains at full precision.
//
// How it works: operands are unpacked into sign, exponent and a 24-bit
// significand with the hidden one. For an add, the smaller operand is aligned to
// the larger one with three extra bits (guard, round, sticky), the significands are
// added or subtracted, the result normalised and rounded to nearest, ties to even.
// A multiply forms the 48-bit product, normalises by at most one bit and rounds
// the same way. Subnormal inputs and results are flushed to zero, an exponent
// overflow gives infinity, and NaN is not produced or propagated: embedding
// values stay far inside the normal range. These simplifications are this
// design's choice; the paper specifies only "a simple arithmetic unit array".
//
// Timing: combinational, result in the same cycle.
module fp32_alu (
  input  logic        mul_i,   // 0: a + b, 1: a * b
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] y_o
);
  function automatic logic [31:0] pack_round(input logic s, input int e,
                                             input logic [23:0] m, input logic g,
                                             input logic st);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 1'b1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255)    return {s, 8'hFF, 23'd0};
    else if (er <= 0) return {s, 31'd0};
    else              return {s, 8'(er), mr[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic        sa, sb;
    int          ea, eb, d, e;
    logic [26:0] ma, mb, sh;
    logic [27:0] s;
    logic        st;
    int          lz;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    // order so that |a| >= |b|
    if (b[30:0] > a[30:0]) begin
      logic [31:0] t;
      t = a; a = b; b = t;
    end
    sa = a[31]; sb = b[31];
    ea = int'(a[30:23]); eb = int'(b[30:23]);
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    d  = ea - eb;
    if (d >= 27) begin
      sh = '0;
      st = 1'b1;
    end else begin
      sh = mb >> d;
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && mb[i]) st = 1'b1;
    end
    sh[0] = sh[0] | st;
    e = ea;
    if (sa == sb) begin
      s = {1'b0, ma} + {1'b0, sh};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 1;
      end
    end else begin
      s = {1'b0, ma} - {1'b0, sh};
      if (s == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 0; i <= 26; i++) begin
        if (s[i]) lz = 26 - i;   // ends at the highest one bit
      end
      s = s << lz;
      e = e - lz;
    end
    return pack_round(sa, e, s[26:3], s[2], s[1] | s[0]);
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic        sy;
    int          e;
    logic [47:0] p;
    sy = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {sy, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return pack_round(sy, e + 1, p[47:24], p[23], |p[22:0]);
    else       return pack_round(sy, e, p[46:23], p[22], |p[21:0]);
  endfunction

  assign y_o = mul_i ? fmul(a_i, b_i) : fadd(a_i, b_i);
endmodule
