// fp_mac: floating point multiply accumulator built on the exponent indexed
// accumulator (paper Fig. 4).
//
// Each cycle, while `ready`, a pair of floats (a, b) may be given.
// fp_mult_stage forms sign, exponent index (NE+1 bits) and the exact
// 2*(NM+1) bit mantissa product; a pipeline register separates it from the
// accumulation stage (the paper notes the design is easily pipelined; the
// register's position is this design's choice).  The product is then added
// into the partial sums exactly as in the plain accumulator, and
// reconstructed on recon_start.  One multiply-accumulate per cycle.
//
// recon_start travels through the same pipeline register, so a product given
// in the same cycle as recon_start is included.  The result's unit is
// 2^(lsb_grp*2^K - 2*BIAS - 2*NM); see eia_accumulator for the format.
//
// Default: bfloat16 with K = 3 and NV = 12, the paper's FPGA bfloat16 MAC.
// fp8 E4M3 (NE=4, NM=3) and E5M2 (NE=5, NM=2) use K = 0 in the paper.
module fp_mac
  import eia_pkg::*;
#(
  parameter int unsigned NE    = 8,
  parameter int unsigned NM    = 7,
  parameter int unsigned K     = 3,
  parameter int unsigned NV    = 12,
  parameter bit          TRACK = 1'b1,
  parameter int unsigned EI    = NE + 1,
  parameter int unsigned MW    = 2 * (NM + 1),
  parameter int unsigned PSW   = MW + (1 << K) + NV,
  parameter int unsigned NG    = 1 << (EI - K),
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB    = 1 << K
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [NE+NM:0]       a,
  input  logic [NE+NM:0]       b,
  output logic                 ready,
  input  logic                 recon_start,
  input  recon_mode_t          recon_mode,
  output logic [SB-1:0]        bits_out,
  output logic                 bits_valid,
  output logic signed [PSW:0]  result,
  output logic                 result_valid,
  output logic [GW-1:0]        lsb_grp
);

  logic            m_sign, m_zero;
  logic [EI-1:0]   m_exp;
  logic [MW-1:0]   m_mag;

  // pipeline register between multiplication and accumulation
  logic            p_valid, p_sign, p_zero, p_start;
  logic [EI-1:0]   p_exp;
  logic [MW-1:0]   p_mag;
  recon_mode_t     p_mode;
  logic            acc_ready;

  fp_mult_stage #(.NE(NE), .NM(NM)) u_mul (
    .a(a), .b(b), .sign(m_sign), .exp(m_exp), .mag(m_mag), .zero(m_zero)
  );

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
      p_exp   <= m_exp;
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
