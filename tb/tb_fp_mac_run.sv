// tb_fp_mac_run: testbench helper driving one fp_mac configuration.
//
// Rounds of random operand pairs are given one per cycle (ready must stay
// high: one multiply-accumulate per cycle), recon_start is raised with the
// last pair, and the reassembled result is compared with the exact sum of
// products worked out from the IEEE definition of each operand.  Every
// third round uses a truncated pass, whose expected value keeps only the
// products of the groups it covers.  `done` rises when all rounds are over.
module tb_fp_mac_run #(
  parameter int unsigned NE     = 8,
  parameter int unsigned NM     = 7,
  parameter int unsigned K      = 3,
  parameter int unsigned ROUNDS = 6
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  import eia_pkg::*;

  localparam int EI = NE + 1, MW = 2 * (NM + 1), NV = 12;
  localparam int PSW = MW + (1 << K) + NV, NG = 1 << (EI - K);
  localparam int GW = (NG > 1) ? $clog2(NG) : 1, SB = 1 << K, W = 1 + NE + NM;

  logic in_valid = 0, recon_start = 0;
  logic [W-1:0] a = '0, b = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [SB-1:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  logic signed [1023:0] gsum [NG];

  fp_mac #(.NE(NE), .NM(NM), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .ready(ready),
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

  function automatic logic signed [1023:0] val(input logic [W-1:0] w);
    logic signed [1023:0] v;
    v = 1024'({w[W-2:NM] != 0, w[NM-1:0]}) << eff_exp(w);
    return w[W-1] ? -v : v;
  endfunction

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int g = 0; g < NG; g++) gsum[g] = '0;
    @(posedge rst_n);
    for (int round = 0; round < ROUNDS; round++) begin
      int n, mn, mx, lo, done0, cyc;
      logic signed [1023:0] expect_v;
      bit trunc;
      trunc = (round % 3 == 2);
      n = 50 + $urandom_range(0, 300);
      mn = NG; mx = -1;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        a = W'($urandom); b = W'($urandom);
        if ($urandom_range(0, 30) == 0) a[W-2:0] = '0;
        in_valid = 1'b1;
        recon_start = (i == n - 1);
        recon_mode.truncate = trunc;
        recon_mode.keep = 1'b0;
        recon_mode.depth = DEPTH_W'($urandom_range(0, 4));
        checks++;
        if (!ready) begin
          failures++;
          $display("FAIL NE%0d NM%0d: not ready during accumulation", NE, NM);
        end
        if (a[W-2:0] != '0 && b[W-2:0] != '0) begin
          int g;
          g = (eff_exp(a) + eff_exp(b)) >> K;
          gsum[g] = gsum[g] + val(a) * val(b);
          if (g < mn) mn = g;
          if (g > mx) mx = g;
        end
      end
      if (mx < 0) begin mn = 0; mx = 0; end
      lo = (trunc && (mx - mn > int'(recon_mode.depth))) ? mx - int'(recon_mode.depth) : mn;
      expect_v = '0;
      for (int g = lo; g <= mx; g++) expect_v = expect_v + gsum[g];
      for (int g = 0; g < NG; g++) gsum[g] = '0;
      @(negedge clk);
      in_valid = 0; recon_start = 0;
      done0 = ndone; cyc = 0;
      while (ndone == done0 && cyc < 1000) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (value != expect_v) begin
        failures++;
        $display("FAIL NE%0d NM%0d K%0d round %0d: %0d expected %0d", NE, NM, K, round, value, expect_v);
      end
      // pipeline register + (hi-lo+1) reads + result
      checks++;
      if (nwords != mx - lo + 1 || cyc != mx - lo + 3) begin
        failures++;
        $display("FAIL NE%0d NM%0d round %0d: %0d words, %0d cycles, groups %0d..%0d",
                 NE, NM, round, nwords, cyc, lo, mx);
      end
    end
    done = 1;
  end

endmodule
