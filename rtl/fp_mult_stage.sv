// fp_mult_stage: the multiplication stage of the floating point MAC
// (paper Fig. 4, "Multiplication").
//
// Both operands are unpacked (hidden bit restored).  The product's sign is
// the XOR of the signs, its exponent index the sum of the two biased
// exponents and its magnitude the full (NM+1)x(NM+1) bit product of the
// mantissas, so no bit of the product is lost.  The product is zero if either
// operand is.
//
// Bias handling (the "Bias Adjust" input of Fig. 4) is this design's choice:
// no constant is subtracted here.  The exponent index is NE+1 bits wide and
// covers every product exponent, and the bias is accounted for in the scale
// of the final result: value = mag * 2^(exp - 2*BIAS - 2*NM).
//
// Purely combinational.
module fp_mult_stage #(
  parameter int unsigned NE = 8,
  parameter int unsigned NM = 7
) (
  input  logic [NE+NM:0]    a,
  input  logic [NE+NM:0]    b,
  output logic              sign,
  output logic [NE:0]       exp,
  output logic [2*NM+1:0]   mag,
  output logic              zero
);

  logic          sa, sb, za, zb;
  logic [NE-1:0] ea, eb;
  logic [NM:0]   ma, mb;

  fp_unpack #(.NE(NE), .NM(NM)) u_ua (.x(a), .sign(sa), .exp(ea), .mag(ma), .zero(za));
  fp_unpack #(.NE(NE), .NM(NM)) u_ub (.x(b), .sign(sb), .exp(eb), .mag(mb), .zero(zb));

  always_comb begin
    sign = sa ^ sb;
    exp  = (NE+1)'(ea) + (NE+1)'(eb);
    mag  = (2*NM+2)'(ma) * (2*NM+2)'(mb);
    zero = za || zb;
  end

endmodule
