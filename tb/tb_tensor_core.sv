// tb_tensor_core: the 4x4 bfloat16 tensor core at its default size (64
// MACs).  Each round streams random matrix pairs A_n, B_n, one pair per
// cycle (ready must stay high), then reconstructs.  Every element
// c[r][l] = sum_n sum_j a_n[r][j] * b_n[j][l] is checked exactly against a
// model built from the IEEE definition of the operands.  The pass must give
// NG words per element, with the result 1 + NG + N + 1 cycles after the
// start cycle (pipeline register, NG reads, N chain stages, result).  One
// round uses a truncated pass covering only the top groups.
module tb_tensor_core;
  import eia_pkg::*;

  localparam int N = 4, NE = 8, NM = 7, K = 3, NG = 64, GW = 6, SB = 8;
  localparam int PSW = 16 + 8 + 12, CW = PSW + 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, recon_start = 0;
  logic [N-1:0][N-1:0][15:0] a = '0, b = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [N-1:0][N-1:0][SB-1:0] bits_out;
  logic signed [N-1:0][N-1:0][CW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value [N][N];
  int unsigned nwords [N][N];
  int unsigned ndone [N][N];
  logic signed [1023:0] expect_v [N][N];
  int checks = 0, failures = 0;

  tensor_core dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b), .ready(ready),
    .recon_start(recon_start), .recon_mode(recon_mode), .bits_out(bits_out),
    .bits_valid(bits_valid), .result(result), .result_valid(result_valid), .lsb_grp(lsb_grp)
  );

  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar l = 0; l < N; l++) begin : g_l
      tb_collect #(.SB(SB), .RW(CW+1), .GW(GW)) u_col (
        .clk(clk), .rst_n(rst_n), .bits(bits_out[r][l]), .bits_valid(bits_valid),
        .result(result[r][l]), .result_valid(result_valid), .lsb_grp(lsb_grp),
        .value(value[r][l]), .nwords(nwords[r][l]), .ndone(ndone[r][l])
      );
    end
  end

  always #5 clk = ~clk;

  initial begin
    #5000000;
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

  function automatic logic [15:0] rand_bf16(input int elo, input int ehi);
    logic [15:0] w;
    w = 16'($urandom);
    w[14:7] = 8'($urandom_range(elo, ehi));
    if ($urandom_range(0, 40) == 0) w[14:0] = '0;
    return w;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int n, elo, ehi, lo, done0, cyc;
      bit trunc;
      trunc = (round == 2);
      n = 5 + $urandom_range(0, 40);
      elo = (round == 0) ? 1 : $urandom_range(60, 120);
      ehi = (round == 0) ? 254 : elo + 20;
      lo = trunc ? NG - 1 - 10 : 0;
      for (int r = 0; r < N; r++) for (int l = 0; l < N; l++) expect_v[r][l] = '0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            a[r][c] = rand_bf16(elo, ehi);
            b[r][c] = rand_bf16(elo, ehi);
          end
        in_valid = 1;
        recon_start = (i == n - 1);
        recon_mode.truncate = trunc;
        recon_mode.keep = 0;
        recon_mode.depth = DEPTH_W'(10);
        checks++;
        if (!ready) begin failures++; $display("FAIL not ready during accumulation"); end
        for (int r = 0; r < N; r++)
          for (int l = 0; l < N; l++)
            for (int j = 0; j < N; j++)
              if (((eff_exp(a[r][j]) + eff_exp(b[j][l])) >> K) >= lo)
                expect_v[r][l] = expect_v[r][l] + val(a[r][j]) * val(b[j][l]);
      end
      done0 = ndone[0][0]; cyc = 0;
      @(negedge clk);
      in_valid = 0; recon_start = 0;
      cyc = 1;
      while (ndone[0][0] == done0 && cyc < 300) begin
        checks++;
        if (ready && !result_valid) begin failures++; $display("FAIL ready during reconstruction"); end
        @(negedge clk);
        cyc++;
      end
      for (int r = 0; r < N; r++)
        for (int l = 0; l < N; l++) begin
          checks++;
          if (value[r][l] != expect_v[r][l] || nwords[r][l] != NG - lo) begin
            failures++;
            $display("FAIL round %0d c[%0d][%0d]: %0d expected %0d (%0d words)",
                     round, r, l, value[r][l], expect_v[r][l], nwords[r][l]);
          end
        end
      // result_valid is sampled by the collectors one edge after it rises
      checks++;
      if (cyc != 1 + (NG - lo) + N + 1 + 1) begin
        failures++;
        $display("FAIL round %0d: result after %0d cycles", round, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
