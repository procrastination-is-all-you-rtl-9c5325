// fp_parallel_accum: parallel exponent indexed accumulator adding NP
// floating point numbers per cycle into one shared set of partial sums
// (paper Fig. 5).
//
// Per lane: fp_unpack restores the hidden bit, the mantissa is made two's
// complement according to the sign (NM+2 bits) and shifted left by the K
// low exponent bits; the NE-K high bits are the exponent group.  route_add
// merges lanes of the same group and produces one write per distinct group.
// The NP-port register file then reads each addressed partial sum, adds the
// merged mantissa and writes it back, all in the same cycle.
//
// Lanes whose in_valid bit is low contribute a zero mantissa.  Reconstruction
// is the same as in the single-lane accumulator: it takes over port 0 of the
// register file (the other ports are disabled) and feeds eia_recon; the
// min/max group tracking watches all lanes.  The result format is that of
// eia_accumulator, unit 2^(lsb_grp*2^K - BIAS - NM).
//
// Default: four bfloat16 lanes (the paper's drawing), K = 3, NV = 12; the
// format and K are this design's choice, the paper leaves them open.
module fp_parallel_accum
  import eia_pkg::*;
#(
  parameter int unsigned NP    = 4,
  parameter int unsigned NE    = 8,
  parameter int unsigned NM    = 7,
  parameter int unsigned K     = 3,
  parameter int unsigned NV    = 12,
  parameter bit          TRACK = 1'b1,
  parameter int unsigned MW    = NM + 1,
  parameter int unsigned PSW   = MW + (1 << K) + NV,
  parameter int unsigned NG    = 1 << (NE - K),
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned SB    = 1 << K
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NP-1:0]            in_valid,
  input  logic [NP-1:0][NE+NM:0]   in_data,
  output logic                     ready,
  input  logic                     recon_start,
  input  recon_mode_t              recon_mode,
  output logic [SB-1:0]            bits_out,
  output logic                     bits_valid,
  output logic signed [PSW:0]      result,
  output logic                     result_valid,
  output logic [GW-1:0]            lsb_grp
);

  localparam int unsigned DW = NM + 2 + (1 << K);     // shifted mantissa
  localparam int unsigned OW = DW + $clog2(NP);       // merged mantissa

  logic [NP-1:0]                 u_sign, u_zero, active;
  logic [NP-1:0][NE-1:0]         u_exp;
  logic [NP-1:0][NM:0]           u_mag;
  logic signed [NP-1:0][DW-1:0]  lane_m;
  logic [NP-1:0][GW-1:0]         lane_g;

  logic [NP-1:0][GW-1:0]         ra_addr;
  logic [NP-1:0]                 ra_we;
  logic signed [NP-1:0][OW-1:0]  ra_data;

  logic [NP-1:0][GW-1:0]         rf_addr;
  logic [NP-1:0]                 rf_we;
  logic [NP-1:0][PSW-1:0]        rf_din, rf_dout;

  logic                          busy, rd_valid, rd_first, rd_last, rd_clear, clear_all;
  logic [GW-1:0]                 rd_addr;

  for (genvar i = 0; i < NP; i++) begin : g_lane
    fp_unpack #(.NE(NE), .NM(NM)) u_unpack (
      .x(in_data[i]), .sign(u_sign[i]), .exp(u_exp[i]), .mag(u_mag[i]), .zero(u_zero[i])
    );
  end

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      logic signed [NM+1:0] tc;
      logic [NE-1:0]        sh;
      active[i] = in_valid[i] && !u_zero[i] && !busy;
      tc        = u_sign[i] ? -$signed({1'b0, u_mag[i]}) : $signed({1'b0, u_mag[i]});
      if (!active[i]) tc = '0;
      sh        = u_exp[i] & NE'((1 << K) - 1);
      lane_m[i] = DW'(tc) <<< sh;
      lane_g[i] = GW'(u_exp[i] >> K);
    end
  end

  route_add #(.NP(NP), .GW(GW), .DW(DW), .OW(OW)) u_route (
    .e(lane_g), .m(lane_m), .addr(ra_addr), .we(ra_we), .data(ra_data)
  );

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (busy) begin
        rf_addr[i] = (i == 0) ? rd_addr : '0;
        rf_we[i]   = (i == 0) ? rd_clear : 1'b0;
        rf_din[i]  = '0;
      end else begin
        rf_addr[i] = ra_addr[i];
        rf_we[i]   = ra_we[i];
        rf_din[i]  = rf_dout[i] + PSW'($signed(ra_data[i]));
      end
    end
  end

  eia_regfile #(.NP(NP), .NG(NG), .W(PSW), .AW(GW)) u_store (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear_all),
    .addr (rf_addr),
    .we   (rf_we),
    .din  (rf_din),
    .dout (rf_dout)
  );

  eia_seq #(.NG(NG), .GW(GW), .NT(NP), .TRACK(TRACK)) u_seq (
    .clk      (clk),
    .rst_n    (rst_n),
    .trk_valid(active),
    .trk_grp  (lane_g),
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
    .psum        (rf_dout[0]),
    .bits        (bits_out),
    .bits_valid  (bits_valid),
    .result      (result),
    .result_valid(result_valid)
  );

  assign ready = !busy;

endmodule
