// fp32_pkg: combinational IEEE-754 binary32 multiply and add used by the PE ALU.
//
// The paper states that the PE ALUs support 32-bit floating-point operations; it
// does not describe the floating-point datapath. This is a compact implementation
// chosen here: round to nearest, ties to even; subnormal inputs and results are
// flushed to signed zero; any NaN operand, inf*0 and inf-inf give the quiet NaN
// 0x7FC00000; overflow gives a signed infinity. Both functions are purely
// combinational and are evaluated within one clock cycle by the ALU.
package fp32_pkg;

  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] p;
    logic [22:0] mant;
    logic        g, st;
    logic signed [10:0] e;
    logic [23:0] mr;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0)) return QNAN;
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'h00 || eb == 8'h00) return QNAN;  // inf * 0
      return {s, 8'hFF, 23'd0};
    end
    if (ea == 8'h00 || eb == 8'h00) return {s, 31'd0};
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    e  = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (p[47]) begin
      mant = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      mant = p[45:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, mant};
    if (g && (st || mant[0])) mr = mr + 24'd1;
    if (mr[23]) begin
      mr = 24'd0; e = e + 11'sd1;
    end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  ex, ey;
    logic [7:0]  d;
    logic [49:0] mx, my, sh, n;
    logic        stk;
    logic [49:0] sum;
    int          lead;
    logic signed [10:0] e;
    logic [22:0] mant;
    logic        g, st;
    logic [23:0] mr;
    if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0)) return QNAN;
    if (a[30:23] == 8'hFF && b[30:23] == 8'hFF)
      return (a[31] == b[31]) ? a : QNAN;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:23] == 8'h00 && b[30:23] == 8'h00) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'h00) return b;
    if (b[30:23] == 8'h00) return a;
    // order by magnitude: |x| >= |y|
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    d  = ex - ey;
    mx = {1'b0, 1'b1, x[22:0], 25'd0};
    my = {1'b0, 1'b1, y[22:0], 25'd0};
    if (d > 8'd49) begin
      sh = 50'd1;  // only a sticky bit survives
    end else begin
      stk = |(my & ((50'd1 << d) - 50'd1));
      sh  = (my >> d) | {49'd0, stk};
    end
    if (x[31] == y[31]) sum = mx + sh;
    else                sum = mx - sh;
    if (sum == 50'd0) return 32'd0;
    lead = 0;
    for (int i = 0; i < 50; i++) if (sum[i]) lead = i;
    e = 11'(signed'({3'b000, ex}));
    if (lead == 49) begin
      n = (sum >> 1) | {49'd0, sum[0]};
      e = e + 11'sd1;
    end else begin
      n = sum << (48 - lead);
      e = e - 11'(48 - lead);
    end
    mant = n[47:25];
    g    = n[24];
    st   = |n[23:0];
    mr   = {1'b0, mant};
    if (g && (st || mant[0])) mr = mr + 24'd1;
    if (mr[23]) begin
      mr = 24'd0; e = e + 11'sd1;
    end
    if (e >= 11'sd255) return {x[31], 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {x[31], 31'd0};
    return {x[31], e[7:0], mr[22:0]};
  endfunction

endpackage
