// eia_accum_core: accumulation data path of the exponent indexed accumulator.
//
// An incoming number is (sign, exponent index, unsigned magnitude).  The K
// low bits of the exponent shift the magnitude left by 0..2^K-1 places; the
// remaining high bits select one of 2^(EI-K) partial sum registers.  The
// shifted magnitude is added to, or subtracted from (sign = 1), that
// register, and the result is written back, all in one clock cycle (paper
// Fig. 2; K = 0 is Fig. 1, K = EI the Kulisch accumulator of Fig. 3).
// Zero inputs do not write.
//
// Partial sums are PSW = MW + 2^K + NV bits, signed: the shifted magnitude
// (MW + 2^K - 1 bits), a sign bit and NV guard bits against overflow, as
// labelled in Fig. 2.  A partial sum that outgrows the NV guard bits wraps.
//
// For reconstruction the register file port is taken over by rd_en: the
// register at rd_addr is shown on rd_data in the same cycle and, if rd_clear
// is set, zeroed at the clock edge.  clear_all zeroes every register.
// Input numbers are ignored while rd_en is high.
module eia_accum_core #(
  parameter int unsigned EI  = 9,                 // exponent index bits
  parameter int unsigned K   = 3,                 // exponent bits used as shift
  parameter int unsigned MW  = 16,                // magnitude bits
  parameter int unsigned NV  = 12,                // overflow guard bits
  parameter int unsigned PSW = MW + (1 << K) + NV,
  parameter int unsigned NG  = 1 << (EI - K),     // partial sum registers
  parameter int unsigned GW  = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_sign,
  input  logic [EI-1:0]         in_exp,
  input  logic [MW-1:0]         in_mag,
  input  logic                  in_zero,
  input  logic                  rd_en,
  input  logic [GW-1:0]         rd_addr,
  input  logic                  rd_clear,
  input  logic                  clear_all,
  output logic signed [PSW-1:0] rd_data,
  output logic [GW-1:0]         in_grp       // group of the current input
);

  localparam int unsigned SW = MW + (1 << K) - 1;   // shifter output bits

  logic [EI-1:0]         sh_amt;
  logic [SW-1:0]         shifted;
  logic signed [PSW-1:0] term;
  logic [0:0][GW-1:0]    rf_addr;
  logic [0:0]            rf_we;
  logic [0:0][PSW-1:0]   rf_din, rf_dout;

  always_comb begin
    in_grp  = GW'(in_exp >> K);
    sh_amt  = in_exp & EI'((1 << K) - 1);
    shifted = SW'(in_mag) << sh_amt;
    term    = in_sign ? -$signed(PSW'(shifted)) : $signed(PSW'(shifted));
    if (rd_en) begin
      rf_addr[0] = rd_addr;
      rf_we[0]   = rd_clear;
      rf_din[0]  = '0;
    end else begin
      rf_addr[0] = in_grp;
      rf_we[0]   = in_valid && !in_zero;
      rf_din[0]  = rf_dout[0] + term;
    end
    rd_data = rf_dout[0];
  end

  eia_regfile #(.NP(1), .NG(NG), .W(PSW), .AW(GW)) u_store (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear_all),
    .addr (rf_addr),
    .we   (rf_we),
    .din  (rf_din),
    .dout (rf_dout)
  );

endmodule
