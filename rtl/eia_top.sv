// eia_top: the exponent indexed accumulator units side by side.
//
// The top level holds one of each unit the design provides, each with its
// own data, handshake and result ports, sharing clock, reset and the
// reconstruction mode word:
//   tc_    tensor_core       4x4 bfloat16 C += A*B per cycle (64 MACs)
//   e4_    fp_mac            fp8 E4M3 MAC, K = 0
//   e5_    fp_mac            fp8 E5M2 MAC, K = 0
//   bf_    fp_mac            bfloat16 MAC, K = 3
//   lg_    log_mac           log4.3 logarithmic MAC, K = 0
//   acc_   fp_accumulator    fp32 accumulator (adder of long sequences), K = 4
//   par_   fp_parallel_accum four bfloat16 numbers added per cycle, K = 3
// The MAC configurations are the ones the paper reports FPGA results for;
// the accumulator and parallel accumulator formats are this design's choice.
//
// Every unit follows the same protocol (see eia_accumulator): give operands
// with *_in_valid while *_ready, pulse *_recon_start, then collect 2^K result
// bits per cycle on *_bits_out while *_bits_valid, and the remaining top bits
// on *_result when *_result_valid pulses.  *_lsb_grp is the exponent group of
// the first result bit.
module eia_top
  import eia_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  recon_mode_t recon_mode,

  // tensor core
  input  logic                       tc_in_valid,
  input  logic [3:0][3:0][15:0]      tc_a,
  input  logic [3:0][3:0][15:0]      tc_b,
  output logic                       tc_ready,
  input  logic                       tc_recon_start,
  output logic [3:0][3:0][7:0]       tc_bits_out,
  output logic                       tc_bits_valid,
  output logic signed [3:0][3:0][38:0] tc_result,
  output logic                       tc_result_valid,
  output logic [5:0]                 tc_lsb_grp,

  // fp8 E4M3 MAC
  input  logic               e4_in_valid,
  input  logic [7:0]         e4_a,
  input  logic [7:0]         e4_b,
  output logic               e4_ready,
  input  logic               e4_recon_start,
  output logic [0:0]         e4_bits_out,
  output logic               e4_bits_valid,
  output logic signed [21:0] e4_result,
  output logic               e4_result_valid,
  output logic [4:0]         e4_lsb_grp,

  // fp8 E5M2 MAC
  input  logic               e5_in_valid,
  input  logic [7:0]         e5_a,
  input  logic [7:0]         e5_b,
  output logic               e5_ready,
  input  logic               e5_recon_start,
  output logic [0:0]         e5_bits_out,
  output logic               e5_bits_valid,
  output logic signed [19:0] e5_result,
  output logic               e5_result_valid,
  output logic [5:0]         e5_lsb_grp,

  // bfloat16 MAC
  input  logic               bf_in_valid,
  input  logic [15:0]        bf_a,
  input  logic [15:0]        bf_b,
  output logic               bf_ready,
  input  logic               bf_recon_start,
  output logic [7:0]         bf_bits_out,
  output logic               bf_bits_valid,
  output logic signed [36:0] bf_result,
  output logic               bf_result_valid,
  output logic [5:0]         bf_lsb_grp,

  // log4.3 MAC
  input  logic               lg_in_valid,
  input  logic [7:0]         lg_a,
  input  logic [7:0]         lg_b,
  output logic               lg_ready,
  input  logic               lg_recon_start,
  output logic [0:0]         lg_bits_out,
  output logic               lg_bits_valid,
  output logic signed [21:0] lg_result,
  output logic               lg_result_valid,
  output logic [4:0]         lg_lsb_grp,

  // fp32 accumulator
  input  logic               acc_in_valid,
  input  logic [31:0]        acc_in_data,
  output logic               acc_ready,
  input  logic               acc_recon_start,
  output logic [15:0]        acc_bits_out,
  output logic               acc_bits_valid,
  output logic signed [52:0] acc_result,
  output logic               acc_result_valid,
  output logic [3:0]         acc_lsb_grp,

  // 4-lane bfloat16 parallel accumulator
  input  logic [3:0]         par_in_valid,
  input  logic [3:0][15:0]   par_in_data,
  output logic               par_ready,
  input  logic               par_recon_start,
  output logic [7:0]         par_bits_out,
  output logic               par_bits_valid,
  output logic signed [28:0] par_result,
  output logic               par_result_valid,
  output logic [4:0]         par_lsb_grp
);

  tensor_core u_tc (
    .clk(clk), .rst_n(rst_n), .in_valid(tc_in_valid), .a(tc_a), .b(tc_b),
    .ready(tc_ready), .recon_start(tc_recon_start), .recon_mode(recon_mode),
    .bits_out(tc_bits_out), .bits_valid(tc_bits_valid), .result(tc_result),
    .result_valid(tc_result_valid), .lsb_grp(tc_lsb_grp)
  );

  fp_mac #(.NE(4), .NM(3), .K(0)) u_e4 (
    .clk(clk), .rst_n(rst_n), .in_valid(e4_in_valid), .a(e4_a), .b(e4_b),
    .ready(e4_ready), .recon_start(e4_recon_start), .recon_mode(recon_mode),
    .bits_out(e4_bits_out), .bits_valid(e4_bits_valid), .result(e4_result),
    .result_valid(e4_result_valid), .lsb_grp(e4_lsb_grp)
  );

  fp_mac #(.NE(5), .NM(2), .K(0)) u_e5 (
    .clk(clk), .rst_n(rst_n), .in_valid(e5_in_valid), .a(e5_a), .b(e5_b),
    .ready(e5_ready), .recon_start(e5_recon_start), .recon_mode(recon_mode),
    .bits_out(e5_bits_out), .bits_valid(e5_bits_valid), .result(e5_result),
    .result_valid(e5_result_valid), .lsb_grp(e5_lsb_grp)
  );

  fp_mac #(.NE(8), .NM(7), .K(3)) u_bf (
    .clk(clk), .rst_n(rst_n), .in_valid(bf_in_valid), .a(bf_a), .b(bf_b),
    .ready(bf_ready), .recon_start(bf_recon_start), .recon_mode(recon_mode),
    .bits_out(bf_bits_out), .bits_valid(bf_bits_valid), .result(bf_result),
    .result_valid(bf_result_valid), .lsb_grp(bf_lsb_grp)
  );

  log_mac u_lg (
    .clk(clk), .rst_n(rst_n), .in_valid(lg_in_valid), .a(lg_a), .b(lg_b),
    .ready(lg_ready), .recon_start(lg_recon_start), .recon_mode(recon_mode),
    .bits_out(lg_bits_out), .bits_valid(lg_bits_valid), .result(lg_result),
    .result_valid(lg_result_valid), .lsb_grp(lg_lsb_grp)
  );

  fp_accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .in_valid(acc_in_valid), .in_data(acc_in_data),
    .ready(acc_ready), .recon_start(acc_recon_start), .recon_mode(recon_mode),
    .bits_out(acc_bits_out), .bits_valid(acc_bits_valid), .result(acc_result),
    .result_valid(acc_result_valid), .lsb_grp(acc_lsb_grp)
  );

  fp_parallel_accum u_par (
    .clk(clk), .rst_n(rst_n), .in_valid(par_in_valid), .in_data(par_in_data),
    .ready(par_ready), .recon_start(par_recon_start), .recon_mode(recon_mode),
    .bits_out(par_bits_out), .bits_valid(par_bits_valid), .result(par_result),
    .result_valid(par_result_valid), .lsb_grp(par_lsb_grp)
  );

endmodule
