// tb_fp_parallel_accum: four bfloat16 lanes at the default parameters.
// Rounds of random numbers, often sharing an exponent group within a cycle
// (narrow exponent ranges) and with idle lanes, zeros and subnormals, are
// summed and reconstructed; the result must equal the exact sum.  Counts how
// many cycles had lanes merged by route_add (must be non-zero) and checks
// that four numbers per cycle are accepted and the pass takes max-min+1
// reads.
module tb_fp_parallel_accum;
  import eia_pkg::*;

  localparam int NP = 4, NE = 8, NM = 7, K = 3;
  localparam int PSW = NM + 1 + (1 << K) + 12, NG = 1 << (NE - K), GW = NE - K, SB = 1 << K;

  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid = '0;
  logic [NP-1:0][15:0] in_data = '0;
  logic recon_start = 0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [SB-1:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  int checks = 0, failures = 0, merged_cycles = 0;

  fp_parallel_accum dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .ready(ready),
    .recon_start(recon_start), .recon_mode(recon_mode), .bits_out(bits_out),
    .bits_valid(bits_valid), .result(result), .result_valid(result_valid), .lsb_grp(lsb_grp)
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

  function automatic int eff_exp(input logic [15:0] w);
    return (w[14:7] == 0) ? 1 : int'(w[14:7]);
  endfunction

  function automatic logic signed [1023:0] val(input logic [15:0] w);
    logic signed [1023:0] v;
    v = 1024'({w[14:7] != 0, w[6:0]}) << eff_exp(w);
    return w[15] ? -v : v;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      int n, elo, span, mn, mx, done0, cyc;
      logic signed [1023:0] expect_v;
      n = 20 + $urandom_range(0, 200);
      elo = $urandom_range(1, 230);
      span = (round % 3 == 0) ? 24 : 6;
      mn = NG; mx = -1;
      expect_v = '0;
      for (int i = 0; i < n; i++) begin
        logic [NG-1:0] seen;
        bit merged;
        @(negedge clk);
        seen = '0; merged = 0;
        for (int p = 0; p < NP; p++) begin
          logic [15:0] w;
          w = 16'($urandom);
          w[14:7] = 8'(elo + $urandom_range(0, span));
          if ($urandom_range(0, 30) == 0) w[14:7] = 8'h00;
          if ($urandom_range(0, 30) == 0) w[14:0] = '0;
          in_data[p]  = w;
          in_valid[p] = ($urandom_range(0, 7) != 0);
          if (in_valid[p]) begin
            int g;
            expect_v = expect_v + val(w);
            if (w[14:0] != 0) begin
              g = eff_exp(w) >> K;
              if (seen[g]) merged = 1;
              seen[g] = 1'b1;
              if (g < mn) mn = g;
              if (g > mx) mx = g;
            end
          end
        end
        if (merged) merged_cycles++;
        recon_start = (i == n - 1);
        checks++;
        if (!ready) begin failures++; $display("FAIL not ready"); end
      end
      if (mx < 0) begin mn = 0; mx = 0; end
      @(negedge clk);
      in_valid = '0; recon_start = 0;
      done0 = ndone; cyc = 0;
      while (ndone == done0 && cyc < 100) begin @(negedge clk); cyc++; end
      checks++;
      if (value != expect_v) begin
        failures++;
        $display("FAIL round %0d: %0d expected %0d lsb %0d elo %0d", round, value, expect_v, lsb_grp, elo);
      end
      checks++;
      if (nwords != mx - mn + 1 || cyc != mx - mn + 2) begin
        failures++;
        $display("FAIL round %0d: %0d words %0d cycles groups %0d..%0d", round, nwords, cyc, mn, mx);
      end
    end
    checks++;
    if (merged_cycles == 0) failures++;
    $display("merged cycles: %0d", merged_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
