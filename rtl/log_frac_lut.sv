// log_frac_lut: converts the fractional part of a logarithmic exponent into
// a linear mantissa, m = 2^(0.ef) (paper Fig. 8, "Fractional Part
// Conversion").
//
// The NEF-bit fraction f selects the MW-bit value
//     round( 2^(MW-1) * 2^(f / 2^NEF) ),
// i.e. a mantissa with its leading one in bit MW-1 (1.0 <= m < 2.0).  For the
// paper's log4.3 MAC (NEF = 3, MW = 8) the table is
//     128 140 152 166 181 197 215 235.
// The entries are computed at elaboration by an integer root search (largest
// y with y^(2^NEF) <= 2^(MW*2^NEF + f), then rounded), so the table follows
// the parameters.  The result is a small ROM; purely combinational.
module log_frac_lut #(
  parameter int unsigned NEF = 3,
  parameter int unsigned MW  = 8
) (
  input  logic [NEF-1:0] ef,
  output logic [MW-1:0]  m
);

  localparam int unsigned NF = 1 << NEF;

  // round(2^(MW-1) * 2^(f/NF)), integer arithmetic only
  function automatic logic [MW-1:0] pow2frac(input int unsigned f);
    logic [511:0] target, p;
    logic [MW:0]  y;
    target = 512'(1) << (MW * NF + f);
    y = '0;
    for (int bitpos = MW; bitpos >= 0; bitpos--) begin
      y[bitpos] = 1'b1;
      p = 512'(1);
      for (int i = 0; i < NF; i++) p = p * 512'(y);
      if (p > target) y[bitpos] = 1'b0;
    end
    return MW'((MW+1)'(y + 1'b1) >> 1);
  endfunction

  logic [MW-1:0] table_q [NF];

  for (genvar f = 0; f < NF; f++) begin : g_tab
    localparam logic [MW-1:0] V = pow2frac(f);
    assign table_q[f] = V;
  end

  assign m = table_q[ef];

endmodule
