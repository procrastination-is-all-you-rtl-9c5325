// fp_accumulator: exponent indexed accumulator for a stream of floating
// point numbers (paper Fig. 1 for K = 0, Fig. 2 in general, Fig. 3 for
// K = NE).
//
// Each cycle one float (sign | NE exponent bits | NM fraction bits) may be
// given.  fp_unpack restores the hidden bit; the (biased) exponent is the
// exponent index and the NM+1 bit mantissa the magnitude, so the float's
// value is magnitude * 2^(index - BIAS - NM).  The sum is exact: see
// eia_accumulator for the reconstruction protocol and result format; the
// result's unit is 2^(lsb_grp*2^K - BIAS - NM).
//
// Default: fp32 (NE=8, NM=23), NV=12 as in the paper's gate count table, and
// K=4, one of the intermediate values the paper points to as a good balance
// of gate count and switching activity (the choice of K is this design's).
module fp_accumulator
  import eia_pkg::*;
#(
  parameter int unsigned NE    = 8,
  parameter int unsigned NM    = 23,
  parameter int unsigned K     = 4,
  parameter int unsigned NV    = 12,
  parameter bit          TRACK = 1'b1,
  parameter int unsigned MW    = NM + 1,
  parameter int unsigned PSW   = MW + (1 << K) + NV,
  parameter int unsigned NG    = 1 << (NE - K),
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB    = 1 << K
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [NE+NM:0]       in_data,
  output logic                 ready,
  input  logic                 recon_start,
  input  recon_mode_t          recon_mode,
  output logic [SB-1:0]        bits_out,
  output logic                 bits_valid,
  output logic signed [PSW:0]  result,
  output logic                 result_valid,
  output logic [GW-1:0]        lsb_grp
);

  logic          u_sign, u_zero;
  logic [NE-1:0] u_exp;
  logic [NM:0]   u_mag;

  fp_unpack #(.NE(NE), .NM(NM)) u_unpack (
    .x   (in_data),
    .sign(u_sign),
    .exp (u_exp),
    .mag (u_mag),
    .zero(u_zero)
  );

  eia_accumulator #(.EI(NE), .K(K), .MW(MW), .NV(NV), .TRACK(TRACK),
                    .PSW(PSW), .NG(NG), .GW(GW), .SB(SB)) u_acc (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (in_valid),
    .in_sign     (u_sign),
    .in_exp      (u_exp),
    .in_mag      (u_mag),
    .in_zero     (u_zero),
    .ready       (ready),
    .recon_start (recon_start),
    .recon_mode  (recon_mode),
    .bits_out    (bits_out),
    .bits_valid  (bits_valid),
    .result      (result),
    .result_valid(result_valid),
    .lsb_grp     (lsb_grp)
  );

endmodule
