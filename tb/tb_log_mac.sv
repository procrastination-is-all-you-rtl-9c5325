// tb_log_mac: random log4.3 operand pairs (s | 4-bit ei | 3-bit ef, code 0
// meaning zero) are multiply-accumulated one per cycle.  The expected sum is
// worked out independently: each product is (-1)^(sa^sb) *
// round(128 * 2^(frac/8)) * 2^int, where int.frac = ea.fa + eb.fb, with the
// rounding done in floating point here.  Exact and truncated passes.
module tb_log_mac;
  import eia_pkg::*;

  localparam int PSW = 8 + 1 + 12, GW = 5;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, recon_start = 0;
  logic [7:0] a = '0, b = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [0:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  logic signed [1023:0] gsum [32];
  int checks = 0, failures = 0;

  log_mac dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .ready(ready),
    .recon_start(recon_start), .recon_mode(recon_mode), .bits_out(bits_out),
    .bits_valid(bits_valid), .result(result), .result_valid(result_valid), .lsb_grp(lsb_grp)
  );

  tb_collect #(.SB(1), .RW(PSW+1), .GW(GW)) u_col (
    .clk(clk), .rst_n(rst_n), .bits(bits_out), .bits_valid(bits_valid), .result(result),
    .result_valid(result_valid), .lsb_grp(lsb_grp), .value(value), .nwords(nwords), .ndone(ndone)
  );

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      int n, mn, mx, lo, done0, cyc;
      bit trunc;
      logic signed [1023:0] expect_v;
      trunc = (round % 4 == 3);
      n = 20 + $urandom_range(0, 300);
      mn = 32; mx = -1;
      for (int g = 0; g < 32; g++) gsum[g] = '0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        a = 8'($urandom); b = 8'($urandom);
        if ($urandom_range(0, 25) == 0) a = 8'h00;
        if (round % 2 == 0) begin a[6] = 1'b0; b[6] = 1'b0; end   // narrower range
        in_valid = 1; recon_start = (i == n - 1);
        recon_mode.truncate = trunc;
        recon_mode.keep = 0;
        recon_mode.depth = DEPTH_W'($urandom_range(0, 8));
        checks++;
        if (!ready) begin failures++; $display("FAIL not ready"); end
        if (a != 0 && b != 0) begin
          int s, ii, ff, m;
          logic signed [1023:0] p;
          s  = a[7] ^ b[7];
          s  = s & 1;
          ii = (int'(a[6:0]) + int'(b[6:0])) >> 3;
          ff = (int'(a[6:0]) + int'(b[6:0])) & 7;
          m  = int'($floor(128.0 * $pow(2.0, real'(ff) / 8.0) + 0.5));
          p  = 1024'(m) << ii;
          gsum[ii] = gsum[ii] + (s ? -p : p);
          if (ii < mn) mn = ii;
          if (ii > mx) mx = ii;
        end
      end
      if (mx < 0) begin mn = 0; mx = 0; end
      lo = (trunc && (mx - mn > int'(recon_mode.depth))) ? mx - int'(recon_mode.depth) : mn;
      expect_v = '0;
      for (int g = lo; g <= mx; g++) expect_v = expect_v + gsum[g];
      @(negedge clk);
      in_valid = 0; recon_start = 0;
      done0 = ndone; cyc = 0;
      while (ndone == done0 && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (value != expect_v) begin
        failures++;
        $display("FAIL round %0d: %0d expected %0d", round, value, expect_v);
      end
      checks++;
      if (nwords != mx - lo + 1 || cyc != mx - lo + 3) begin
        failures++;
        $display("FAIL round %0d: %0d words %0d cycles, groups %0d..%0d", round, nwords, cyc, lo, mx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
