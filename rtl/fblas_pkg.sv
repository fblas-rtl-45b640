// fblas_pkg: element type and arithmetic shared by every streaming BLAS module.
//
// All modules work on IEEE-754 single-precision words (the precision of the
// main evaluated configuration). The two operators below are written as pure
// combinational functions so that each module can place its own pipeline
// registers after them; a module's latency is therefore a parameter of that
// module, not of the operator.
//
// Operator semantics (a design choice; the source only says "single
// precision"): round to nearest, ties to even; subnormal inputs and results
// are flushed to signed zero; overflow gives infinity; NaN inputs are not
// distinguished from infinity. This matches the "relaxed" floating point mode
// that FPGA compilers use for hardened DSP arithmetic closely enough for
// linear algebra data.
package fblas_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;

  // Flip the sign bit: used where a module needs -alpha.
  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // Pack sign, a biased exponent that may be out of range and a 23-bit
  // fraction, saturating to infinity or flushing to zero.
  function automatic fp32_t fp_pack(input logic s, input logic signed [11:0] e,
                                    input logic [22:0] f);
    if (e >= 12'sd255) return {s, 8'hff, 23'd0};
    if (e <= 12'sd0)   return {s, 31'd0};
    return {s, e[7:0], f};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic               s;
    logic [7:0]         ea, eb;
    logic [23:0]        ma, mb;
    logic [47:0]        p;
    logic [22:0]        mant;
    logic               g, st;
    logic signed [11:0] e;
    logic [23:0]        mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'hff || eb == 8'hff) return {s, 8'hff, 23'd0};
    if (ea == 8'd0 || eb == 8'd0)   return {s, 31'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = $signed({4'd0, ea}) + $signed({4'd0, eb}) - 12'sd127;
    if (p[47]) begin
      mant = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 12'sd1;
    end else begin
      mant = p[45:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, mant} + ((g && (st || mant[0])) ? 24'd1 : 24'd0);
    if (mr[23]) e = e + 12'sd1;   // rounding carried out: fraction is 0
    return fp_pack(s, e, mr[22:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t              x, y;
    logic [7:0]         ex, ey, d;
    logic [51:0]        mx, my, sum, n;
    logic               sticky, g, st;
    logic signed [11:0] e;
    int                 p;
    logic [22:0]        mant;
    logic [23:0]        mr;
    // order the operands so that |x| >= |y|
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    if (ex == 8'hff) return {x[31], 8'hff, 23'd0};
    if (ey == 8'd0) return (ex == 8'd0) ? {x[31] & y[31], 31'd0} : x;
    d  = ex - ey;
    mx = {1'b0, 1'b1, x[22:0], 27'd0};
    my = {1'b0, 1'b1, y[22:0], 27'd0};
    if (d > 8'd50) begin
      sticky = 1'b1;
      my     = '0;
    end else begin
      sticky = |(my & ((52'd1 << d) - 52'd1));
      my     = my >> d;
    end
    my[0] = my[0] | sticky;
    sum = (x[31] == y[31]) ? mx + my : mx - my;
    if (sum == '0) return FP_ZERO;
    p = 0;
    for (int i = 0; i < 52; i++) if (sum[i]) p = i;
    // leading one of mx sits at bit 50
    e = $signed({4'd0, ex}) + 12'(p) - 12'sd50;
    n = sum << (51 - p);   // bit 51 is the hidden one, not stored
    mant = n[50:28];
    g    = n[27];
    st   = |n[26:0];
    mr = {1'b0, mant} + ((g && (st || mant[0])) ? 24'd1 : 24'd0);
    if (mr[23]) e = e + 12'sd1;
    return fp_pack(x[31], e, mr[22:0]);
  endfunction

  // ceil(log2(v)) for elaboration-time sizing
  function automatic int clog2i(input int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage
