// log_mac: multiply accumulator for logarithmic numbers (paper Fig. 7/8).
//
// A logarithmic number is  s | ei | ef  (sign, NEI-bit integer and NEF-bit
// fractional part of an unsigned fixed point exponent), with value
// (-1)^s * 2^(ei.ef).  The product of two such numbers needs no multiplier:
// its sign is the XOR of the signs and its exponent the sum of the two fixed
// point exponents.  The sum's integer part (NEI+1 bits, carries included)
// becomes the exponent index; its fractional part goes through log_frac_lut
// to give the MW-bit mantissa 2^(0.ef).  Sign, index and mantissa are then
// accumulated exactly like a floating point product.
//
// Zero: the all-zero code is reserved for the value zero (one of the two
// options the paper offers); a product with a zero operand is not written.
// A pipeline register separates multiplication and accumulation, as in
// fp_mac.  The result's unit is 2^(lsb_grp*2^K - (MW-1)).
//
// Default: the paper's log4.3 MAC, NEI = 4, NEF = 3, an 8-bit conversion
// table, K = 0, NV = 12.
module log_mac
  import eia_pkg::*;
#(
  parameter int unsigned NEI   = 4,
  parameter int unsigned NEF   = 3,
  parameter int unsigned MW    = 8,
  parameter int unsigned K     = 0,
  parameter int unsigned NV    = 12,
  parameter bit          TRACK = 1'b1,
  parameter int unsigned EI    = NEI + 1,
  parameter int unsigned PSW   = MW + (1 << K) + NV,
  parameter int unsigned NG    = 1 << (EI - K),
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB    = 1 << K
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [NEI+NEF:0]      a,
  input  logic [NEI+NEF:0]      b,
  output logic                  ready,
  input  logic                  recon_start,
  input  recon_mode_t           recon_mode,
  output logic [SB-1:0]         bits_out,
  output logic                  bits_valid,
  output logic signed [PSW:0]   result,
  output logic                  result_valid,
  output logic [GW-1:0]         lsb_grp
);

  localparam int unsigned LW = NEI + NEF;   // fixed point exponent bits

  logic            m_sign, m_zero;
  logic [LW:0]     m_sum;                   // NEI+1 integer . NEF fraction
  logic [MW-1:0]   m_mag;

  logic            p_valid, p_sign, p_zero, p_start;
  logic [EI-1:0]   p_exp;
  logic [MW-1:0]   p_mag;
  recon_mode_t     p_mode;
  logic            acc_ready;

  always_comb begin
    m_sign = a[LW] ^ b[LW];
    m_sum  = (LW+1)'(a[LW-1:0]) + (LW+1)'(b[LW-1:0]);
    m_zero = (a == '0) || (b == '0);
  end

  log_frac_lut #(.NEF(NEF), .MW(MW)) u_lut (.ef(m_sum[NEF-1:0]), .m(m_mag));

  assign ready = acc_ready && !p_start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_start <= 1'b0;
      p_sign  <= 1'b0;
      p_zero  <= 1'b1;
      p_exp   <= '0;
      p_mag   <= '0;
      p_mode  <= '0;
    end else begin
      p_valid <= in_valid && ready;
      p_start <= recon_start && ready;
      p_sign  <= m_sign;
      p_zero  <= m_zero;
      p_exp   <= m_sum[LW:NEF];
      p_mag   <= m_mag;
      p_mode  <= recon_mode;
    end
  end

  eia_accumulator #(.EI(EI), .K(K), .MW(MW), .NV(NV), .TRACK(TRACK),
                    .PSW(PSW), .NG(NG), .GW(GW), .SB(SB)) u_acc (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (p_valid),
    .in_sign     (p_sign),
    .in_exp      (p_exp),
    .in_mag      (p_mag),
    .in_zero     (p_zero),
    .ready       (acc_ready),
    .recon_start (p_start),
    .recon_mode  (p_mode),
    .bits_out    (bits_out),
    .bits_valid  (bits_valid),
    .result      (result),
    .result_valid(result_valid),
    .lsb_grp     (lsb_grp)
  );

endmodule
