// eia_accumulator: a complete exponent indexed accumulator.
//
// Numbers (sign, exponent index, magnitude) are accepted one per cycle while
// `ready` is high and added into exponent indexed partial sums by
// eia_accum_core.  A pulse on recon_start (mode given by recon_mode) starts
// the reconstruction: eia_seq steps through the groups, the partial sums are
// read (and cleared) through the same register file port, and eia_recon
// turns them into the exact sum, 2^K bits per cycle from the least
// significant end, then the remaining top bits.
//
// Result format: with n words on bits_out (bits_valid high n cycles) and the
// signed `result` (result_valid pulses with the last word), the sum equals
//   ( sum_c bits_out_c * 2^(c*2^K) + result * 2^(n*2^K) ) * 2^(lsb_grp*2^K)
// in units of the input's exponent index (value = magnitude * 2^index).
//
// Latency: a pass over G groups gives bits on G consecutive cycles starting
// two cycles after recon_start; result_valid is high together with the last
// bits word.
// `ready` is low from the cycle after recon_start until the last group has
// been read; inputs may be given in the same cycle as recon_start and are
// included in the result.
module eia_accumulator
  import eia_pkg::*;
#(
  parameter int unsigned EI    = 9,
  parameter int unsigned K     = 3,
  parameter int unsigned MW    = 16,
  parameter int unsigned NV    = 12,
  parameter bit          TRACK = 1'b1,
  parameter int unsigned PSW   = MW + (1 << K) + NV,
  parameter int unsigned NG    = 1 << (EI - K),
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB    = 1 << K
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sign,
  input  logic [EI-1:0]        in_exp,
  input  logic [MW-1:0]        in_mag,
  input  logic                 in_zero,
  output logic                 ready,
  input  logic                 recon_start,
  input  recon_mode_t          recon_mode,
  output logic [SB-1:0]        bits_out,
  output logic                 bits_valid,
  output logic signed [PSW:0]  result,
  output logic                 result_valid,
  output logic [GW-1:0]        lsb_grp
);

  logic                  busy, rd_valid, rd_first, rd_last, rd_clear, clear_all;
  logic [GW-1:0]         rd_addr, in_grp;
  logic signed [PSW-1:0] rd_data;
  logic                  acc_valid;

  assign ready     = !busy;
  assign acc_valid = in_valid && !busy;

  eia_accum_core #(.EI(EI), .K(K), .MW(MW), .NV(NV), .PSW(PSW), .NG(NG), .GW(GW)) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (acc_valid),
    .in_sign  (in_sign),
    .in_exp   (in_exp),
    .in_mag   (in_mag),
    .in_zero  (in_zero),
    .rd_en    (rd_valid),
    .rd_addr  (rd_addr),
    .rd_clear (rd_clear),
    .clear_all(clear_all),
    .rd_data  (rd_data),
    .in_grp   (in_grp)
  );

  eia_seq #(.NG(NG), .GW(GW), .NT(1), .TRACK(TRACK)) u_seq (
    .clk      (clk),
    .rst_n    (rst_n),
    .trk_valid(acc_valid && !in_zero),
    .trk_grp  (in_grp),
    .start    (recon_start && !busy),
    .mode     (recon_mode),
    .busy     (busy),
    .rd_valid (rd_valid),
    .rd_addr  (rd_addr),
    .rd_first (rd_first),
    .rd_last  (rd_last),
    .rd_clear (rd_clear),
    .clear_all(clear_all),
    .lsb_grp  (lsb_grp)
  );

  eia_recon #(.W(PSW), .SB(SB)) u_recon (
    .clk         (clk),
    .rst_n       (rst_n),
    .en          (rd_valid),
    .first       (rd_first),
    .last        (rd_last),
    .psum        (rd_data),
    .bits        (bits_out),
    .bits_valid  (bits_valid),
    .result      (result),
    .result_valid(result_valid)
  );

endmodule
