// route_add: the Route & Add module of the parallel exponent indexed
// accumulator (paper Fig. 6).
//
// NP shifted mantissas m_i arrive with their exponent groups e_i.  Each
// input i is compared for equality with every input to its right (j > i);
// the comparisons gate m_j into an adder that sums m_i with all the inputs
// of the same group, giving DATA_i.  The same comparisons disable the write
// enable of every input that has an equal group to its left:
//     WE_0 = 1,   WE_j = NOR_{i<j} (e_i == e_j).
// So each distinct group is written by exactly one port, its leftmost one,
// with the sum of all inputs of that group, and no two enabled ports share
// an address.  ADDR_i is e_i unchanged.
//
// The adder is written as a sum over the gated inputs; a synthesis tool
// builds the tree.  DATA is clog2(NP) bits wider than m.  Purely
// combinational.
module route_add #(
  parameter int unsigned NP = 4,    // inputs per cycle
  parameter int unsigned GW = 5,    // exponent group bits
  parameter int unsigned DW = 18,   // signed mantissa bits
  parameter int unsigned OW = DW + $clog2(NP)
) (
  input  logic        [NP-1:0][GW-1:0] e,
  input  logic signed [NP-1:0][DW-1:0] m,
  output logic        [NP-1:0][GW-1:0] addr,
  output logic        [NP-1:0]         we,
  output logic signed [NP-1:0][OW-1:0] data
);

  logic [NP-1:0][NP-1:0] eq;   // eq[i][j], i < j: e_i == e_j

  always_comb begin
    eq = '0;
    for (int i = 0; i < NP; i++)
      for (int j = i + 1; j < NP; j++)
        eq[i][j] = (e[i] == e[j]);

    for (int i = 0; i < NP; i++) begin
      addr[i] = e[i];
      data[i] = OW'($signed(m[i]));
      for (int j = i + 1; j < NP; j++)
        if (eq[i][j]) data[i] = data[i] + OW'($signed(m[j]));
      we[i] = 1'b1;
      for (int j = 0; j < i; j++)
        if (eq[j][i]) we[i] = 1'b0;
    end
  end

endmodule
