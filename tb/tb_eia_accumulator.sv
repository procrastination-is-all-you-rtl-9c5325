// tb_eia_accumulator: end-to-end check of the accumulator with small
// parameters (6-bit exponent index, K = 1).  Rounds of random signed inputs
// (with zeros and idle cycles) are followed by a reconstruction pass, exact,
// truncated or keep; the reassembled result must equal the exact sum of the
// inputs of the groups covered.  Inputs offered during a pass must be
// refused (ready low).  The pass must take (max-min+1) cycles and deliver
// that many words; its last word and top bits arrive G+1 cycles after start.
module tb_eia_accumulator;
  import eia_pkg::*;

  localparam int EI = 6, K = 1, MW = 6, NV = 12;
  localparam int PSW = MW + (1 << K) + NV, NG = 1 << (EI - K), GW = EI - K, SB = 1 << K;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0, in_zero = 0, recon_start = 0;
  logic [EI-1:0] in_exp = '0;
  logic [MW-1:0] in_mag = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [SB-1:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  logic signed [1023:0] gsum [NG];
  int checks = 0, failures = 0, refused = 0;

  eia_accumulator #(.EI(EI), .K(K), .MW(MW), .NV(NV)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sign(in_sign), .in_exp(in_exp),
    .in_mag(in_mag), .in_zero(in_zero), .ready(ready), .recon_start(recon_start),
    .recon_mode(recon_mode), .bits_out(bits_out), .bits_valid(bits_valid), .result(result),
    .result_valid(result_valid), .lsb_grp(lsb_grp)
  );

  tb_collect #(.SB(SB), .RW(PSW+1), .GW(GW)) u_col (
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

  task automatic drive_random();
    in_valid = 1'b1;
    in_sign  = 1'($urandom);
    in_exp   = EI'($urandom);
    in_mag   = MW'($urandom) | MW'(1 << (MW - 1));
    in_zero  = ($urandom_range(0, 15) == 0);
  endtask

  initial begin
    int mn, mx;
    mn = NG; mx = -1;
    for (int g = 0; g < NG; g++) gsum[g] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 24; round++) begin
      int n, lo, cyc, done0;
      bit trunc, keep;
      logic signed [1023:0] expect_v;
      n = 1 + $urandom_range(0, 200);
      trunc = (round % 3 == 1);
      keep  = (round % 6 == 5);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) in_valid = 0; else drive_random();
        recon_start = (i == n - 1);
        recon_mode.truncate = trunc;
        recon_mode.keep     = keep;
        recon_mode.depth    = DEPTH_W'($urandom_range(0, 6));
        checks++;
        if (!ready) begin
          failures++;
          $display("FAIL not ready during accumulation");
        end
        if (in_valid && !in_zero) begin
          int g;
          g = int'(in_exp) >> K;
          gsum[g] = gsum[g] + (in_sign ? -(1024'(in_mag) << in_exp) : (1024'(in_mag) << in_exp));
          if (g < mn) mn = g;
          if (g > mx) mx = g;
        end
      end
      if (mx < 0) begin mn = 0; mx = 0; end
      lo = (trunc && (mx - mn > int'(recon_mode.depth))) ? mx - int'(recon_mode.depth) : mn;
      expect_v = '0;
      for (int g = lo; g <= mx; g++) expect_v = expect_v + gsum[g];
      // keep offering numbers during the pass: they must be refused
      done0 = ndone;
      cyc = 0;
      while (ndone == done0 && cyc < 100) begin
        @(negedge clk);
        recon_start = 0;
        cyc++;
        if (result_valid) begin
          in_valid = 0;
          break;
        end
        // the number offered here is not accepted: the pass is running
        drive_random();
        checks++;
        if (ready) begin
          failures++;
          $display("FAIL ready during reconstruction");
        end else refused++;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (value != expect_v || nwords != mx - lo + 1 || cyc != mx - lo + 2) begin
        failures++;
        $display("FAIL round %0d (trunc %0d keep %0d lo %0d hi %0d): %0d expected %0d, %0d words, %0d cycles",
                 round, trunc, keep, lo, mx, value, expect_v, nwords, cyc);
      end
      if (!keep) begin
        for (int g = 0; g < NG; g++) gsum[g] = '0;
        mn = NG; mx = -1;
      end
    end
    checks++;
    if (refused == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
