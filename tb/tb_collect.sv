// tb_collect: testbench helper that reassembles the output of an exponent
// indexed accumulator's reconstruction pass into one wide integer.
//
// It concatenates the SB-bit words seen on `bits` while bits_valid (least
// significant word first), adds the signed top part `result` when
// result_valid pulses (result_valid coincides with the last word) and
// scales by 2^(lsb_grp*SB).  Words seen while rst_n is low are ignored.  `value` is then the exact sum in units of the
// unit's exponent index; `nwords` is the number of words of the pass and
// `ndone` counts completed passes.
module tb_collect #(
  parameter int unsigned SB = 8,
  parameter int unsigned RW = 37,
  parameter int unsigned GW = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [SB-1:0]          bits,
  input  logic                   bits_valid,
  input  logic signed [RW-1:0]   result,
  input  logic                   result_valid,
  input  logic [GW-1:0]          lsb_grp,
  output logic signed [1023:0]   value,
  output int unsigned            nwords,
  output int unsigned            ndone
);

  logic signed [1023:0] acc;
  int unsigned          pos;

  initial begin
    acc    = '0;
    pos    = 0;
    value  = '0;
    nwords = 0;
    ndone  = 0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      acc = '0;
      pos = 0;
    end else begin
      if (bits_valid) begin
        acc = acc | (1024'(bits) << pos);
        pos = pos + SB;
      end
      if (result_valid) begin
        value  = (acc + (1024'(result) <<< pos)) <<< (int'(lsb_grp) * SB);
        nwords = pos / SB;
        ndone  = ndone + 1;
        acc    = '0;
        pos    = 0;
      end
    end
  end

endmodule
