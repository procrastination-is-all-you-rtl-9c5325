// eia_recon: the reconstruction stage of the exponent indexed accumulator.
//
// The partial sums arrive one per enabled cycle, lowest exponent group first.
// Each one is added to a small signed accumulator, the SB = 2^k low bits of
// the sum are output as the next bits of the final result, and the sum is
// shifted right (arithmetically) by SB before being stored back.  After the
// last partial sum the accumulator holds the top bits of the result.  The
// accumulator needs only one bit more than a partial sum (W+1 bits), because
// each shift removes at least one bit of growth.
//
// Timing: `first` marks the first partial sum (the old accumulator value is
// ignored), `last` the final one.  bits/bits_valid appear one cycle after
// each enabled input; result/result_valid one cycle after `last`.
// The full value is  sum_c bits_c * 2^(c*SB) + result * 2^(n*SB)  for the n
// bit words c = 0..n-1.
module eia_recon #(
  parameter int unsigned W  = 36,   // partial sum width (signed)
  parameter int unsigned SB = 8     // result bits per cycle, 2^k
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic                 last,
  input  logic signed [W-1:0]  psum,
  output logic [SB-1:0]        bits,
  output logic                 bits_valid,
  output logic signed [W:0]    result,
  output logic                 result_valid
);

  logic signed [W:0] acc, sum;

  always_comb begin
    sum = (first ? '0 : acc) + (W+1)'(psum);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc          <= '0;
      bits         <= '0;
      bits_valid   <= 1'b0;
      result_valid <= 1'b0;
    end else begin
      bits_valid   <= en;
      result_valid <= en && last;
      if (en) begin
        bits <= sum[SB-1:0];
        acc  <= sum >>> SB;
      end
    end
  end

  assign result = acc;

endmodule
