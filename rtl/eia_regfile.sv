// eia_regfile: the partial sums storage of the exponent indexed accumulator.
//
// NG registers of W bits each.  Every one of the NP ports has an address, a
// write enable and write data, and an asynchronous (combinational) read of
// the register at its address, so a port can read, add and write back a
// partial sum within one clock cycle, as in the paper's Fig. 1 (decoder
// driving the register enables, multiplexer selecting the read data).  With
// NP > 1 it is the multi-port register file of the parallel accumulator
// (Fig. 5); the caller must never enable two writes to the same register in
// one cycle (an assertion checks this).
//
// `clear` sets every register to zero in one cycle, the common synchronous
// reset the paper mentions for flip-flop storage in ASICs; it wins over
// writes.  Reset (rst_n low, sampled on the clock) clears the registers too,
// since the circuit must start with all partial sums at zero.
module eia_regfile #(
  parameter int unsigned NP = 1,                       // ports
  parameter int unsigned NG = 32,                      // registers
  parameter int unsigned W  = 36,                      // bits per register
  parameter int unsigned AW = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [NP-1:0][AW-1:0] addr,
  input  logic [NP-1:0]         we,
  input  logic [NP-1:0][W-1:0]  din,
  output logic [NP-1:0][W-1:0]  dout
);

  logic [W-1:0] mem [NG];

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      dout[p] = (32'(addr[p]) < NG) ? mem[addr[p]] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int g = 0; g < NG; g++) mem[g] <= '0;
    end else begin
      for (int p = 0; p < NP; p++) begin
        if (we[p] && (32'(addr[p]) < NG)) mem[addr[p]] <= din[p];
      end
    end
  end

  // Two ports may not write the same register in the same cycle.
  always_comb begin
    if (rst_n && !clear) begin
      for (int p = 0; p < NP; p++)
        for (int q = p + 1; q < NP; q++)
          assert (!(we[p] && we[q] && addr[p] == addr[q]))
            else $error("eia_regfile: ports %0d and %0d write register %0d together", p, q, addr[p]);
    end
  end

endmodule
