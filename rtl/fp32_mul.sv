// fp32_mul: IEEE-754 single-precision multiplier, unit 1 of the PE chain.
//
// Purely combinational: the PE runs one micro-operation per clock, so the
// product is available in the same cycle as its operands. The significands
// (with the hidden one) are multiplied into a 48-bit product, normalised by at
// most one place and rounded to nearest-even. Subnormal inputs are read as
// zero and results too small for a normal number are flushed to signed zero;
// overflow gives infinity, and a NaN or 0*inf gives the canonical quiet NaN.
// The paper asks only for "multipliers" working on FP32; the rounding and the
// flush-to-zero treatment are this design's choices.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [9:0]  ey;        // signed, biased exponent of the result
  logic [23:0] mant;
  logic        g, st, rnd;
  logic [24:0] mr;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]}; mb = {1'b1, b[22:0]};
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);
    prod   = ma * mb;
    ey     = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (prod[47]) begin
      mant = prod[47:24]; g = prod[23]; st = |prod[22:0];
      ey   = ey + 10'd1;
    end else begin
      mant = prod[46:23]; g = prod[22]; st = |prod[21:0];
    end
    rnd = g & (st | mant[0]);
    mr  = {1'b0, mant} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      ey = ey + 10'd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {sy, 31'd0};
    else if (ey[9] || ey == 10'd0)          // underflow: flush to zero
      y = {sy, 31'd0};
    else if (ey >= 10'd255)                 // overflow
      y = {sy, 8'hFF, 23'd0};
    else
      y = {sy, ey[7:0], mr[22:0]};
  end
endmodule
