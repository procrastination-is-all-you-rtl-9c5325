// tensor_core: 4x4 bfloat16 matrix multiply-accumulate, C += A*B every
// cycle, built from N^3 = 64 exponent indexed MACs (paper Sec. 3.1).
//
// Element c[r][l] = sum_j sum_n a_n[r][j] * b_n[j][l].  For each (r, l) there
// is a chain of N MACs, MAC j accumulating the products a[r][j]*b[j][l] over
// all input matrices.  Each MAC is an fp_mult_stage, a pipeline register and
// an eia_accum_core (own partial sums, K = 3, product exponent index of
// NE+1 bits).  All MACs run independently during accumulation.
//
// Reconstruction is shared along each chain, as the DSP cascade does it in
// the paper: one eia_seq issues the group addresses; MAC j reads its
// partial sum j cycles later, adds it to the running chain sum from MAC j-1
// and registers it; after the N-th stage the summed partial sum of all four
// MACs enters one eia_recon per element.  The groups therefore flow through
// the chain without a stall, and the pass takes as many cycles as one MAC's,
// plus N cycles of chain latency.  Partial sums are cleared as they are read.
//
// Min/max exponent tracking is not done here (as in the paper's minimalist
// FPGA MACs): every pass covers all NG groups, from group 0.  The chain sum
// has PSW+2 bits, the reconstruction accumulator PSW+3.
// Result format per element as in eia_accumulator, with lsb_grp the first
// group read; unit 2^(lsb_grp*2^K - 2*BIAS - 2*NM).
module tensor_core
  import eia_pkg::*;
#(
  parameter int unsigned N   = 4,     // matrix dimension
  parameter int unsigned NE  = 8,
  parameter int unsigned NM  = 7,
  parameter int unsigned K   = 3,
  parameter int unsigned NV  = 12,
  parameter int unsigned EI  = NE + 1,
  parameter int unsigned MW  = 2 * (NM + 1),
  parameter int unsigned PSW = MW + (1 << K) + NV,
  parameter int unsigned NG  = 1 << (EI - K),
  parameter int unsigned GW  = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB  = 1 << K,
  parameter int unsigned CW  = PSW + $clog2(N)     // chain sum width
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N-1:0][N-1:0][NE+NM:0]  a,          // a[row][col]
  input  logic [N-1:0][N-1:0][NE+NM:0]  b,          // b[row][col]
  output logic                          ready,
  input  logic                          recon_start,
  input  recon_mode_t                   recon_mode,
  output logic [N-1:0][N-1:0][SB-1:0]   bits_out,   // per element c[r][l]
  output logic                          bits_valid,
  output logic signed [N-1:0][N-1:0][CW:0] result,
  output logic                          result_valid,
  output logic [GW-1:0]                 lsb_grp
);

  // ---------------------------------------------------------------- control
  logic          p_valid, p_start;
  recon_mode_t   p_mode;
  logic          s_busy, s_rd_valid, s_rd_first, s_rd_last, s_rd_clear, s_clear_all;
  logic [GW-1:0] s_rd_addr;

  // read controls delayed by j cycles for chain stage j (index 0 = undelayed)
  logic [N-1:0]          d_valid, d_first, d_last, d_clear, d_clear_all;
  logic [N-1:0][GW-1:0]  d_addr;
  // chain stage registers: valid/first/last travelling with the chain sums
  logic [N-1:0]          c_valid, c_first, c_last;
  logic                  draining;
  logic [N-1:0][N-1:0]   e_bits_valid, e_result_valid;

  eia_seq #(.NG(NG), .GW(GW), .NT(1), .TRACK(1'b0)) u_seq (
    .clk      (clk),
    .rst_n    (rst_n),
    .trk_valid(1'b0),
    .trk_grp  ('0),
    .start    (p_start),
    .mode     (p_mode),
    .busy     (s_busy),
    .rd_valid (s_rd_valid),
    .rd_addr  (s_rd_addr),
    .rd_first (s_rd_first),
    .rd_last  (s_rd_last),
    .rd_clear (s_rd_clear),
    .clear_all(s_clear_all),
    .lsb_grp  (lsb_grp)
  );

  assign d_valid[0]     = s_rd_valid;
  assign d_first[0]     = s_rd_first;
  assign d_last[0]      = s_rd_last;
  assign d_clear[0]     = s_rd_clear;
  assign d_clear_all[0] = s_clear_all;
  assign d_addr[0]      = s_rd_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 1; j < N; j++) begin
        d_valid[j]     <= 1'b0;
        d_first[j]     <= 1'b0;
        d_last[j]      <= 1'b0;
        d_clear[j]     <= 1'b0;
        d_clear_all[j] <= 1'b0;
        d_addr[j]      <= '0;
      end
      c_valid <= '0;
      c_first <= '0;
      c_last  <= '0;
      p_valid <= 1'b0;
      p_start <= 1'b0;
      p_mode  <= '0;
    end else begin
      for (int j = 1; j < N; j++) begin
        d_valid[j]     <= d_valid[j-1];
        d_first[j]     <= d_first[j-1];
        d_last[j]      <= d_last[j-1];
        d_clear[j]     <= d_clear[j-1];
        d_clear_all[j] <= d_clear_all[j-1];
        d_addr[j]      <= d_addr[j-1];
      end
      c_valid <= d_valid;
      c_first <= d_first;
      c_last  <= d_last;
      p_valid <= in_valid && ready;
      p_start <= recon_start && ready;
      p_mode  <= recon_mode;
    end
  end

  assign draining = s_busy || (|d_valid) || (|c_valid);
  assign ready    = !draining && !p_start;

  // -------------------------------------------------------------- MAC array
  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar l = 0; l < N; l++) begin : g_col
      logic signed [N-1:0][CW-1:0] chain;     // registered chain sums
      logic signed [N-1:0][PSW-1:0] psum;

      for (genvar j = 0; j < N; j++) begin : g_mac
        logic          m_sign, m_zero, q_sign, q_zero;
        logic [EI-1:0] m_exp, q_exp;
        logic [MW-1:0] m_mag, q_mag;
        logic [GW-1:0] grp_unused;
        logic signed [CW-1:0] chain_in;   // sum arriving from MAC j-1

        if (j == 0) begin : g_head
          assign chain_in = '0;
        end else begin : g_link
          assign chain_in = chain[j-1];
        end

        fp_mult_stage #(.NE(NE), .NM(NM)) u_mul (
          .a(a[r][j]), .b(b[j][l]),
          .sign(m_sign), .exp(m_exp), .mag(m_mag), .zero(m_zero)
        );

        always_ff @(posedge clk) begin
          if (!rst_n) begin
            q_sign <= 1'b0;
            q_zero <= 1'b1;
            q_exp  <= '0;
            q_mag  <= '0;
          end else begin
            q_sign <= m_sign;
            q_zero <= m_zero;
            q_exp  <= m_exp;
            q_mag  <= m_mag;
          end
        end

        eia_accum_core #(.EI(EI), .K(K), .MW(MW), .NV(NV), .PSW(PSW), .NG(NG), .GW(GW)) u_core (
          .clk      (clk),
          .rst_n    (rst_n),
          .in_valid (p_valid),
          .in_sign  (q_sign),
          .in_exp   (q_exp),
          .in_mag   (q_mag),
          .in_zero  (q_zero),
          .rd_en    (d_valid[j]),
          .rd_addr  (d_addr[j]),
          .rd_clear (d_clear[j]),
          .clear_all(d_clear_all[j]),
          .rd_data  (psum[j]),
          .in_grp   (grp_unused)
        );

        always_ff @(posedge clk) begin
          if (!rst_n) begin
            chain[j] <= '0;
          end else if (d_valid[j]) begin
            chain[j] <= chain_in + CW'($signed(psum[j]));
          end
        end
      end

      eia_recon #(.W(CW), .SB(SB)) u_recon (
        .clk         (clk),
        .rst_n       (rst_n),
        .en          (c_valid[N-1]),
        .first       (c_first[N-1]),
        .last        (c_last[N-1]),
        .psum        (chain[N-1]),
        .bits        (bits_out[r][l]),
        .bits_valid  (e_bits_valid[r][l]),
        .result      (result[r][l]),
        .result_valid(e_result_valid[r][l])
      );
    end
  end

  // all elements reconstruct in lock step
  assign bits_valid   = &e_bits_valid;
  assign result_valid = &e_result_valid;

endmodule
