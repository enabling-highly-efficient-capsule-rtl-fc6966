// pe_shifter: unit 3 of the PE chain, the bit shifter.
//
// Combinational. Two modes (pim_pkg::sh_mode_e):
//   SH_R1  y = x >> 1 on the raw bits. Halving the bit pattern halves the
//          exponent; subtracted from a magic constant it gives the classic
//          seed for 1/sqrt(x).
//   SH_BS  the "BS" step of the exponential approximation. The FP32 input t
//          (t = log2(e)*x + Avg + b - 1) is turned into the bit pattern
//          floor(t * 2^23): its significand 1.f is shifted left by (ep - b)
//          places when ep >= b and right otherwise, so the integer part of t
//          lands in the exponent field and the fraction in the fraction
//          field of the result. t <= 0 or negative gives +0; t >= 255 gives
//          +infinity.
// The shift-based exponent transfer follows the paper's description of
// Fig. 11; the saturation limits are this design's choice.
module pe_shifter
  import pim_pkg::*;
(
  input  logic [31:0] x,
  input  sh_mode_e    mode,
  output logic [31:0] y
);
  logic [7:0]  ep;
  logic [38:0] sig;   // significand 1.f, shifted to floor(t * 2^23)

  always_comb begin
    ep  = x[30:23];
    sig = '0;
    if (mode == SH_R1) begin
      y = {1'b0, x[31:1]};
    end else if (x[31] || ep == 8'd0) begin
      y = 32'd0;
    end else if (ep >= 8'd135) begin        // t >= 256
      y = 32'h7F80_0000;
    end else begin
      sig = {15'd0, 1'b1, x[22:0]};
      if (ep >= 8'd127) sig = sig << (ep - 8'd127);
      else              sig = sig >> (8'd127 - ep);
      if (sig[30:23] == 8'hFF) y = 32'h7F80_0000; // t >= 255: exponent all ones
      else                     y = sig[31:0];
    end
  end
endmodule
