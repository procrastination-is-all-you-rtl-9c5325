// fp_unpack: splits a binary floating point word into the fields the
// exponent indexed accumulator needs.
//
// The word is sign | exponent (NE bits) | fraction (NM bits).  The mantissa
// is rebuilt with its hidden bit (the '1' prepended to the fraction in the
// paper's block diagrams), giving an NM+1 bit unsigned magnitude.  A zero
// value is flagged so that the accumulator can skip the write-back.
//
// Design choices not fixed by the paper: a zero exponent field is read as a
// subnormal (hidden bit 0, effective exponent 1), which keeps the sum exact
// for every encodable finite value; all-ones exponents (Inf/NaN in IEEE
// formats) get no special treatment and are accumulated as ordinary numbers.
// The exponent is kept biased; the caller accounts for the bias in the scale
// of the final result.
//
// Purely combinational.
module fp_unpack #(
  parameter int unsigned NE = 8,   // exponent bits
  parameter int unsigned NM = 7    // fraction bits (hidden bit not counted)
) (
  input  logic [NE+NM:0] x,
  output logic           sign,
  output logic [NE-1:0]  exp,      // effective biased exponent
  output logic [NM:0]    mag,      // hidden bit & fraction
  output logic           zero
);

  logic [NE-1:0] ef;
  logic [NM-1:0] ff;

  always_comb begin
    sign = x[NE+NM];
    ef   = x[NE+NM-1:NM];
    ff   = x[NM-1:0];
    zero = (ef == '0) && (ff == '0);
    if (ef == '0) begin
      exp = NE'(1);
      mag = {1'b0, ff};
    end else begin
      exp = ef;
      mag = {1'b1, ff};
    end
  end

endmodule
