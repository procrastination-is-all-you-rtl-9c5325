// tb_fp_acc_run: testbench helper driving one fp_accumulator configuration
// (float format NE/NM, group size K) through exact summations.
//
// Each round gives random floats one per cycle (ready must stay high), with
// exponents over the whole range of the format (subnormals and signed zeros
// included, the all-ones exponent excluded) or, every other round, from a
// narrow window.  recon_start is raised with the last number, and the
// reassembled result is compared with the exact sum worked out from the
// IEEE definition of each float.  The pass must deliver max-min+1 words for
// the groups written.  When NLONG is non-zero a final round adds NLONG
// numbers, to show a long sequence at NV = 12 guard bits.  `done` rises when
// all rounds are over.
module tb_fp_acc_run #(
  parameter int unsigned NE     = 8,
  parameter int unsigned NM     = 23,
  parameter int unsigned K      = 4,
  parameter int unsigned ROUNDS = 4,
  parameter int unsigned NLONG  = 0
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import eia_pkg::*;

  localparam int NV = 12, MW = NM + 1;
  localparam int PSW = MW + (1 << K) + NV, NG = 1 << (NE - K);
  localparam int GW = (NG > 1) ? $clog2(NG) : 1, SB = 1 << K, W = 1 + NE + NM;
  localparam int EMAX = (1 << NE) - 2;

  logic in_valid = 0, recon_start = 0;
  logic [W-1:0] in_data = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [SB-1:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;

  fp_accumulator #(.NE(NE), .NM(NM), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .ready(ready),
    .recon_start(recon_start), .recon_mode(recon_mode), .bits_out(bits_out),
    .bits_valid(bits_valid), .result(result), .result_valid(result_valid), .lsb_grp(lsb_grp)
  );

  tb_collect #(.SB(SB), .RW(PSW+1), .GW(GW)) u_col (
    .clk(clk), .rst_n(rst_n), .bits(bits_out), .bits_valid(bits_valid), .result(result),
    .result_valid(result_valid), .lsb_grp(lsb_grp), .value(value), .nwords(nwords), .ndone(ndone)
  );

  function automatic int eff_exp(input logic [W-1:0] w);
    int e;
    e = int'(w[W-2:NM]);
    return (e == 0) ? 1 : e;
  endfunction

  // value of a float in units of 2^-(BIAS+NM): magnitude shifted by the effective exponent
  function automatic logic signed [1023:0] val(input logic [W-1:0] w);
    logic signed [1023:0] v;
    v = 1024'({w[W-2:NM] != 0, w[NM-1:0]}) << eff_exp(w);
    return w[W-1] ? -v : v;
  endfunction

  initial begin
    done = 0; checks = 0; failures = 0;
    @(posedge rst_n);
    for (int round = 0; round < ROUNDS + (NLONG > 0 ? 1 : 0); round++) begin
      int n, elo, ehi, mn, mx, cyc, done0;
      logic signed [1023:0] expect_v;
      if (round == ROUNDS) n = NLONG;
      else                 n = 100 + $urandom_range(0, 300);
      if (round % 2 == 1) begin
        elo = $urandom_range(0, EMAX);
        ehi = elo + $urandom_range(0, 2 << K);
        if (ehi > EMAX) ehi = EMAX;
      end else begin
        elo = 0; ehi = EMAX;
      end
      expect_v = '0;
      mn = NG; mx = -1;
      for (int i = 0; i < n; i++) begin
        logic [W-1:0] w;
        @(negedge clk);
        if (!ready) begin
          failures++;
          $display("FAIL NE=%0d NM=%0d K=%0d: not ready during accumulation", NE, NM, K);
        end
        w = W'({$urandom, $urandom});
        w[W-2:NM] = NE'($urandom_range(elo, ehi));
        if ($urandom_range(0, 31) == 0) w[W-2:0] = '0;      // signed zero
        in_data     = w;
        in_valid    = 1'b1;
        recon_start = (i == n - 1);
        expect_v    = expect_v + val(w);
        if (w[W-2:0] != '0) begin
          int g;
          g = eff_exp(w) >> K;
          if (g < mn) mn = g;
          if (g > mx) mx = g;
        end
      end
      done0 = ndone;
      cyc = 0;
      @(negedge clk);
      in_valid = 0; recon_start = 0;
      while (ndone == done0 && cyc < NG + 10) begin
        @(negedge clk);
        cyc++;
      end
      if (mx < 0) begin mn = 0; mx = 0; end
      checks++;
      if (value != expect_v || nwords != mx - mn + 1) begin
        failures++;
        $display("FAIL NE=%0d NM=%0d K=%0d round %0d (n=%0d): got %0d expected %0d, %0d words for groups %0d..%0d",
                 NE, NM, K, round, n, value, expect_v, nwords, mn, mx);
      end
    end
    done = 1;
  end

endmodule
