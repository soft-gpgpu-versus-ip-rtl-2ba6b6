// fp32_pkg: IEEE-754 single-precision multiply and add as functions, the
// arithmetic of the DSP blocks in the complex functional unit.
//
// Both round to nearest even.  Subnormal inputs and results are flushed to
// a signed zero, overflow gives infinity, any NaN gives the quiet NaN
// 7FC00000.  These rounding details are this design's choice; the
// architecture only says that each functional unit is built from FP32 DSP
// blocks.  Both functions are combinational and synthesizable.
package fp32_pkg;

  localparam logic [31:0] FP_ONE  = 32'h3F80_0000;
  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  function automatic logic [31:0] fp_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] mr;
    int          e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0)) return FP_QNAN;
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'h00 || eb == 8'h00) return FP_QNAN;   // inf * 0
      return {s, 8'hFF, 23'd0};
    end
    if (ea == 8'h00 || eb == 8'h00) return {s, 31'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = int'(ea) + int'(eb) - 127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    mr = {1'b0, m} + ((g && (st || m[0])) ? 25'd1 : 25'd0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  ex, ey;
    logic [50:0] mx, my, r;
    logic        sticky, sx, sy;
    int          d, lz, e;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] mr;
    logic        a_nan, b_nan, a_inf, b_inf;
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != 0);
    b_nan = (b[30:23] == 8'hFF) && (b[22:0] != 0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == 0);
    b_inf = (b[30:23] == 8'hFF) && (b[22:0] == 0);
    if (a_nan || b_nan) return FP_QNAN;
    if (a_inf && b_inf) return (a[31] == b[31]) ? a : FP_QNAN;
    if (a_inf) return a;
    if (b_inf) return b;
    // Flush subnormals to zero.
    x = (a[30:23] == 8'h00) ? {a[31], 31'd0} : a;
    y = (b[30:23] == 8'h00) ? {b[31], 31'd0} : b;
    if (x[30:0] == 0 && y[30:0] == 0) return {x[31] & y[31], 31'd0};
    if (x[30:0] == 0) return y;
    if (y[30:0] == 0) return x;
    // Order by magnitude: |x| >= |y|.
    if (y[30:0] > x[30:0]) begin
      {x, y} = {y, x};
    end
    sx = x[31];
    sy = y[31];
    ex = x[30:23];
    ey = y[30:23];
    d  = int'(ex) - int'(ey);
    mx = {1'b0, 1'b1, x[22:0], 26'd0};
    my = {1'b0, 1'b1, y[22:0], 26'd0};
    if (d > 27) begin
      my     = 51'd1;                     // only a sticky bit survives
    end else if (d > 0) begin
      sticky = |(my & ((51'd1 << d) - 51'd1));
      my     = (my >> d) | {50'd0, sticky};
    end
    r = (sx == sy) ? (mx + my) : (mx - my);
    if (r == 0) return 32'd0;
    // Leading one position; the hidden bit of x sits at bit 49.
    lz = 0;
    for (int i = 50; i >= 0; i--) begin
      if (r[i]) begin
        lz = 50 - i;
        break;
      end
    end
    // Normalise so the leading one is at bit 50.
    r  = r << lz;
    e  = int'(ex) + 1 - lz;
    m  = r[50:27];
    g  = r[26];
    st = |r[25:0];
    mr = {1'b0, m} + ((g && (st || m[0])) ? 25'd1 : 25'd0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {sx, 8'hFF, 23'd0};
    if (e <= 0)   return {sx, 31'd0};
    return {sx, e[7:0], mr[22:0]};
  endfunction

  // Sign-bit inversion, used for subtraction on port D.
  function automatic logic [31:0] fp_neg(input logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

endpackage
