// fp32_add: unit 2 of the PE chain, an IEEE-754 single-precision adder.
//
// Combinational. Three modes (pim_pkg::add_mode_e):
//   ADD_F   y = c + a        in FP32
//   ADD_FR  y = c - a        in FP32 (reverse subtract: constant minus value)
//   ADD_IR  y = c - a        as 32-bit integers, used to form the seed of
//                            the bit-trick inverse square root and reciprocal
// FP32 path: order the operands by magnitude, align the smaller significand
// with three guard/round/sticky bits, add or subtract, renormalise with a
// leading-zero count and round to nearest-even. Subnormals read as zero and
// tiny results flush to zero; infinities and NaNs propagate. The paper calls
// only for "adders"; the integer mode serves its bit-shifting approximation
// of inverse square root and division, the rest is this design's choice.
module fp32_add
  import pim_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] c,
  input  add_mode_e   mode,
  output logic [31:0] y
);
  logic [31:0] x0, x1;          // x0 + x1 with x1 carrying the sign flip
  logic [31:0] big, sml;
  logic [7:0]  eb, es, d;
  logic [26:0] mb, ms, msh;
  logic [27:0] sum;
  logic        sub, sy;
  logic [4:0]  lz;
  logic [9:0]  ey;
  logic [26:0] norm;
  logic        rnd;
  logic [24:0] mr;
  logic        big_nan, sml_nan, big_inf, sml_inf;

  always_comb begin
    x0 = c;
    x1 = (mode == ADD_F) ? a : {~a[31], a[30:0]};
    if (x1[30:0] > x0[30:0]) begin big = x1; sml = x0; end
    else                     begin big = x0; sml = x1; end
    eb = big[30:23]; es = sml[30:23];
    mb = (eb == 8'd0) ? 27'd0 : {1'b1, big[22:0], 3'b000};
    ms = (es == 8'd0) ? 27'd0 : {1'b1, sml[22:0], 3'b000};
    d  = eb - es;
    if (d >= 8'd27) msh = {26'd0, |ms};
    else begin
      msh = ms >> d;
      msh[0] = msh[0] | |(ms & ~(27'h7FF_FFFF << d));
    end
    sub = big[31] ^ sml[31];
    sy  = big[31];
    sum = sub ? ({1'b0, mb} - {1'b0, msh}) : ({1'b0, mb} + {1'b0, msh});
    ey  = {2'b00, eb};
    lz  = 5'd0;
    norm = 27'd0;
    if (sum[27]) begin
      norm = sum[27:1];
      norm[0] = norm[0] | sum[0];
      ey = ey + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && lz == 5'd0 && norm == 27'd0) begin
          lz   = 5'(26 - i);
          norm = sum[26:0] << (26 - i);
        end
      end
      ey = ey - {5'd0, lz};
    end
    rnd = norm[2] & (norm[1] | norm[0] | norm[3]);
    mr  = {1'b0, norm[26:3]} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      ey = ey + 10'd1;
    end
    big_nan = (eb == 8'hFF) && (big[22:0] != 0);
    sml_nan = (es == 8'hFF) && (sml[22:0] != 0);
    big_inf = (eb == 8'hFF) && (big[22:0] == 0);
    sml_inf = (es == 8'hFF) && (sml[22:0] == 0);

    if (mode == ADD_IR)
      y = c - a;
    else if (big_nan || sml_nan || (big_inf && sml_inf && sub))
      y = 32'h7FC0_0000;
    else if (big_inf)
      y = {big[31], 8'hFF, 23'd0};
    else if (sum == 28'd0)
      y = 32'd0;
    else if (ey[9] || ey == 10'd0)
      y = {sy, 31'd0};
    else if (ey >= 10'd255)
      y = {sy, 8'hFF, 23'd0};
    else
      y = {sy, ey[7:0], mr[22:0]};
  end
endmodule
