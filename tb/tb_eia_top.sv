// tb_eia_top: end-to-end test of the whole design at its default
// parameters (no parameter overrides).  Every unit of eia_top is taken
// through complete operations and its exact result checked against a model
// built from the number formats' definitions:
//   tensor core   : a stream of 4x4 bfloat16 matrix pairs, chained pass
//   fp8/bf16 MACs : sums of products, exact and truncated passes
//   log4.3 MAC    : a keep pass (partial sums retained) then more products
//                   and an exact pass over everything
//   fp32 adder    : subnormals, zeros, inputs offered during the pass
//   parallel adder: four lanes per cycle with same-group merges
// It counts how often each mechanism happened (stall of an offered input,
// zero skipped, subnormal, lane merge, exact / truncated / keep / chained
// pass) and counts a failure for any that never happened.
module tb_eia_top;
  import eia_pkg::*;

  logic clk = 0, rst_n = 0;
  recon_mode_t recon_mode = '0;

  // tensor core
  logic tc_in_valid = 0, tc_recon_start = 0;
  logic [3:0][3:0][15:0] tc_a = '0, tc_b = '0;
  logic tc_ready, tc_bits_valid, tc_result_valid;
  logic [3:0][3:0][7:0] tc_bits_out;
  logic signed [3:0][3:0][38:0] tc_result;
  logic [5:0] tc_lsb_grp;
  // scalar MACs
  logic e4_in_valid = 0, e4_recon_start = 0, e5_in_valid = 0, e5_recon_start = 0;
  logic bf_in_valid = 0, bf_recon_start = 0, lg_in_valid = 0, lg_recon_start = 0;
  logic [7:0] e4_a = '0, e4_b = '0, e5_a = '0, e5_b = '0, lg_a = '0, lg_b = '0;
  logic [15:0] bf_a = '0, bf_b = '0;
  logic e4_ready, e5_ready, bf_ready, lg_ready;
  logic [0:0] e4_bits_out, e5_bits_out, lg_bits_out;
  logic [7:0] bf_bits_out;
  logic e4_bits_valid, e5_bits_valid, bf_bits_valid, lg_bits_valid;
  logic e4_result_valid, e5_result_valid, bf_result_valid, lg_result_valid;
  logic signed [21:0] e4_result, lg_result;
  logic signed [19:0] e5_result;
  logic signed [36:0] bf_result;
  logic [4:0] e4_lsb_grp, lg_lsb_grp;
  logic [5:0] e5_lsb_grp, bf_lsb_grp;
  // fp32 accumulator
  logic acc_in_valid = 0, acc_recon_start = 0;
  logic [31:0] acc_in_data = '0;
  logic acc_ready, acc_bits_valid, acc_result_valid;
  logic [15:0] acc_bits_out;
  logic signed [52:0] acc_result;
  logic [3:0] acc_lsb_grp;
  // parallel accumulator
  logic [3:0] par_in_valid = '0;
  logic [3:0][15:0] par_in_data = '0;
  logic par_recon_start = 0;
  logic par_ready, par_bits_valid, par_result_valid;
  logic [7:0] par_bits_out;
  logic signed [28:0] par_result;
  logic [4:0] par_lsb_grp;

  int checks = 0, failures = 0;
  int n_stall = 0, n_zero = 0, n_subnormal = 0, n_merge = 0;
  int n_exact = 0, n_trunc = 0, n_keep = 0, n_chain = 0;

  eia_top dut (.*);

  // collectors
  logic signed [1023:0] v_e4, v_e5, v_bf, v_lg, v_acc, v_par;
  int unsigned w_e4, w_e5, w_bf, w_lg, w_acc, w_par, d_e4, d_e5, d_bf, d_lg, d_acc, d_par;
  logic signed [1023:0] v_tc [4][4];
  int unsigned w_tc [4][4];
  int unsigned d_tc [4][4];

  tb_collect #(.SB(1),  .RW(22), .GW(5)) c_e4 (.clk(clk), .rst_n(rst_n), .bits(e4_bits_out), .bits_valid(e4_bits_valid),
    .result(e4_result), .result_valid(e4_result_valid), .lsb_grp(e4_lsb_grp), .value(v_e4), .nwords(w_e4), .ndone(d_e4));
  tb_collect #(.SB(1),  .RW(20), .GW(6)) c_e5 (.clk(clk), .rst_n(rst_n), .bits(e5_bits_out), .bits_valid(e5_bits_valid),
    .result(e5_result), .result_valid(e5_result_valid), .lsb_grp(e5_lsb_grp), .value(v_e5), .nwords(w_e5), .ndone(d_e5));
  tb_collect #(.SB(8),  .RW(37), .GW(6)) c_bf (.clk(clk), .rst_n(rst_n), .bits(bf_bits_out), .bits_valid(bf_bits_valid),
    .result(bf_result), .result_valid(bf_result_valid), .lsb_grp(bf_lsb_grp), .value(v_bf), .nwords(w_bf), .ndone(d_bf));
  tb_collect #(.SB(1),  .RW(22), .GW(5)) c_lg (.clk(clk), .rst_n(rst_n), .bits(lg_bits_out), .bits_valid(lg_bits_valid),
    .result(lg_result), .result_valid(lg_result_valid), .lsb_grp(lg_lsb_grp), .value(v_lg), .nwords(w_lg), .ndone(d_lg));
  tb_collect #(.SB(16), .RW(53), .GW(4)) c_acc (.clk(clk), .rst_n(rst_n), .bits(acc_bits_out), .bits_valid(acc_bits_valid),
    .result(acc_result), .result_valid(acc_result_valid), .lsb_grp(acc_lsb_grp), .value(v_acc), .nwords(w_acc), .ndone(d_acc));
  tb_collect #(.SB(8),  .RW(29), .GW(5)) c_par (.clk(clk), .rst_n(rst_n), .bits(par_bits_out), .bits_valid(par_bits_valid),
    .result(par_result), .result_valid(par_result_valid), .lsb_grp(par_lsb_grp), .value(v_par), .nwords(w_par), .ndone(d_par));

  for (genvar r = 0; r < 4; r++) begin : g_r
    for (genvar l = 0; l < 4; l++) begin : g_l
      tb_collect #(.SB(8), .RW(39), .GW(6)) c_tc (.clk(clk), .rst_n(rst_n), .bits(tc_bits_out[r][l]),
        .bits_valid(tc_bits_valid), .result(tc_result[r][l]), .result_valid(tc_result_valid),
        .lsb_grp(tc_lsb_grp), .value(v_tc[r][l]), .nwords(w_tc[r][l]), .ndone(d_tc[r][l]));
    end
  end

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ reference
  function automatic int eff_exp(input logic [31:0] w, input int ne, input int nm);
    int e;
    e = int'((w >> nm) & ((1 << ne) - 1));
    return (e == 0) ? 1 : e;
  endfunction

  // value of a float in units of 2^-(bias+nm)
  function automatic logic signed [1023:0] fval(input logic [31:0] w, input int ne, input int nm);
    logic signed [1023:0] v;
    logic [31:0] f;
    int e;
    e = int'((w >> nm) & ((1 << ne) - 1));
    f = w & ((32'd1 << nm) - 1);
    v = (e == 0) ? 1024'(f) : 1024'(f) + (1024'(1) << nm);
    v = v << eff_exp(w, ne, nm);
    return w[ne+nm] ? -v : v;
  endfunction

  function automatic bit is_zero(input logic [31:0] w, input int ne, input int nm);
    return ((w & ((32'd1 << (ne + nm)) - 1)) == 0);
  endfunction

  function automatic bit is_sub(input logic [31:0] w, input int ne, input int nm);
    return !is_zero(w, ne, nm) && (((w >> nm) & ((1 << ne) - 1)) == 0);
  endfunction

  // log4.3 product in units of 2^-7
  function automatic logic signed [1023:0] lprod(input logic [7:0] x, input logic [7:0] y);
    int s, ii, ff, m;
    logic signed [1023:0] p;
    if (x == 0 || y == 0) return '0;
    s  = (x[7] ^ y[7]) ? 1 : 0;
    ii = (int'(x[6:0]) + int'(y[6:0])) >> 3;
    ff = (int'(x[6:0]) + int'(y[6:0])) & 7;
    m  = int'($floor(128.0 * $pow(2.0, real'(ff) / 8.0) + 0.5));
    p  = 1024'(m) << ii;
    return s ? -p : p;
  endfunction

  task automatic check_val(input string what, input logic signed [1023:0] got,
                           input logic signed [1023:0] want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: %0d expected %0d", what, got, want);
    end
  endtask

  // ------------------------------------------------------------ sequences
  task automatic run_tc();
    logic signed [1023:0] want [4][4];
    int unsigned prev_cnt;
    for (int r = 0; r < 4; r++) for (int l = 0; l < 4; l++) want[r][l] = '0;
    recon_mode = '0;
    for (int i = 0; i < 24; i++) begin
      @(negedge clk);
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          tc_a[r][c] = 16'($urandom);
          tc_b[r][c] = 16'($urandom);
          if (i == 3) tc_a[r][c][14:7] = 8'h00;
        end
      tc_in_valid = 1;
      tc_recon_start = (i == 23);
      for (int r = 0; r < 4; r++)
        for (int l = 0; l < 4; l++)
          for (int j = 0; j < 4; j++)
            want[r][l] = want[r][l] + fval(32'(tc_a[r][j]), 8, 7) * fval(32'(tc_b[j][l]), 8, 7);
    end
    prev_cnt = d_tc[0][0];
    @(negedge clk);
    tc_in_valid = 1; tc_recon_start = 0;     // offered during the pass: stalled
    while (!tc_ready) begin
      n_stall++;
      @(negedge clk);
    end
    tc_in_valid = 0;
    wait (d_tc[0][0] != prev_cnt);
    n_chain++;
    for (int r = 0; r < 4; r++)
      for (int l = 0; l < 4; l++)
        check_val($sformatf("tensor core c[%0d][%0d]", r, l), v_tc[r][l], want[r][l]);
  endtask

  task automatic run_fp8_bf16(input bit trunc);
    logic signed [1023:0] w4, w5, wb;
    logic signed [1023:0] g4 [32];
    logic signed [1023:0] g5 [64];
    logic signed [1023:0] gb [64];
    int unsigned b4, b5, bb;
    int m4, m5, mb;
    m4 = -1; m5 = -1; mb = -1;
    for (int g = 0; g < 64; g++) begin gb[g] = '0; g5[g] = '0; end
    for (int g = 0; g < 32; g++) g4[g] = '0;
    recon_mode = '0;
    recon_mode.truncate = trunc;
    recon_mode.depth = DEPTH_W'(3);
    for (int i = 0; i < 300; i++) begin
      int g;
      @(negedge clk);
      e4_a = 8'($urandom); e4_b = 8'($urandom);
      e5_a = 8'($urandom); e5_b = 8'($urandom);
      bf_a = 16'($urandom); bf_b = 16'($urandom);
      if (i % 25 == 0) begin e4_a[6:0] = '0; e5_b[6:0] = '0; bf_a[14:0] = '0; end
      e4_in_valid = 1; e5_in_valid = 1; bf_in_valid = 1;
      e4_recon_start = (i == 299); e5_recon_start = (i == 299); bf_recon_start = (i == 299);
      if (is_zero(32'(e4_a), 4, 3)) n_zero++;
      if (is_sub(32'(e4_a), 4, 3)) n_subnormal++;
      // exponent group of each product (K = 0, 0, 3)
      if (!is_zero(32'(e4_a), 4, 3) && !is_zero(32'(e4_b), 4, 3)) begin
        g = eff_exp(32'(e4_a), 4, 3) + eff_exp(32'(e4_b), 4, 3);
        g4[g] = g4[g] + fval(32'(e4_a), 4, 3) * fval(32'(e4_b), 4, 3);
        if (g > m4) m4 = g;
      end
      if (!is_zero(32'(e5_a), 5, 2) && !is_zero(32'(e5_b), 5, 2)) begin
        g = eff_exp(32'(e5_a), 5, 2) + eff_exp(32'(e5_b), 5, 2);
        g5[g] = g5[g] + fval(32'(e5_a), 5, 2) * fval(32'(e5_b), 5, 2);
        if (g > m5) m5 = g;
      end
      if (!is_zero(32'(bf_a), 8, 7) && !is_zero(32'(bf_b), 8, 7)) begin
        g = (eff_exp(32'(bf_a), 8, 7) + eff_exp(32'(bf_b), 8, 7)) >> 3;
        gb[g] = gb[g] + fval(32'(bf_a), 8, 7) * fval(32'(bf_b), 8, 7);
        if (g > mb) mb = g;
      end
    end
    b4 = d_e4; b5 = d_e5; bb = d_bf;
    @(negedge clk);
    e4_in_valid = 0; e5_in_valid = 0; bf_in_valid = 0;
    e4_recon_start = 0; e5_recon_start = 0; bf_recon_start = 0;
    wait (d_e4 != b4);
    wait (d_e5 != b5);
    wait (d_bf != bb);
    // a truncated pass keeps the groups from (highest - depth) upwards
    w4 = '0; w5 = '0; wb = '0;
    for (int g = 0; g < 32; g++) if (!trunc || g >= m4 - 3) w4 = w4 + g4[g];
    for (int g = 0; g < 64; g++) if (!trunc || g >= m5 - 3) w5 = w5 + g5[g];
    for (int g = 0; g < 64; g++) if (!trunc || g >= mb - 3) wb = wb + gb[g];
    if (trunc) n_trunc++; else n_exact++;
    check_val(trunc ? "fp8 E4M3 MAC truncated" : "fp8 E4M3 MAC", v_e4, w4);
    check_val(trunc ? "fp8 E5M2 MAC truncated" : "fp8 E5M2 MAC", v_e5, w5);
    check_val(trunc ? "bfloat16 MAC truncated" : "bfloat16 MAC", v_bf, wb);
  endtask

  task automatic run_log();
    logic signed [1023:0] w1, w2;
    int unsigned prev_cnt;
    w1 = '0;
    recon_mode = '0;
    recon_mode.keep = 1'b1;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk);
      lg_a = 8'($urandom); lg_b = 8'($urandom);
      if (i % 30 == 0) lg_b = 8'h00;
      if (lg_a == 0 || lg_b == 0) n_zero++;
      lg_in_valid = 1; lg_recon_start = (i == 149);
      w1 = w1 + lprod(lg_a, lg_b);
    end
    prev_cnt = d_lg;
    @(negedge clk);
    lg_in_valid = 0; lg_recon_start = 0;
    wait (d_lg != prev_cnt);
    n_keep++;
    check_val("log4.3 MAC keep pass", v_lg, w1);
    // keep accumulating on top of the retained partial sums
    recon_mode.keep = 1'b0;
    w2 = w1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      lg_a = 8'($urandom); lg_b = 8'($urandom);
      lg_in_valid = 1; lg_recon_start = (i == 99);
      w2 = w2 + lprod(lg_a, lg_b);
    end
    prev_cnt = d_lg;
    @(negedge clk);
    lg_in_valid = 0; lg_recon_start = 0;
    wait (d_lg != prev_cnt);
    n_exact++;
    check_val("log4.3 MAC after keep", v_lg, w2);
  endtask

  task automatic run_acc();
    logic signed [1023:0] want;
    int unsigned prev_cnt;
    want = '0;
    recon_mode = '0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      acc_in_data = $urandom;
      if (i % 40 == 5) acc_in_data[30:23] = 8'h00;
      if (i % 50 == 7) acc_in_data[30:0] = '0;
      if (acc_in_data[30:23] == 8'hff) acc_in_data[30:23] = 8'hfe;
      if (is_sub(acc_in_data, 8, 23)) n_subnormal++;
      if (is_zero(acc_in_data, 8, 23)) n_zero++;
      acc_in_valid = 1; acc_recon_start = (i == 399);
      want = want + fval(acc_in_data, 8, 23);
    end
    prev_cnt = d_acc;
    @(negedge clk);
    acc_recon_start = 0;
    acc_in_data = 32'h3f80_0000;             // offered during the pass: stalled
    while (!acc_ready) begin
      n_stall++;
      @(negedge clk);
    end
    acc_in_valid = 0;
    wait (d_acc != prev_cnt);
    n_exact++;
    check_val("fp32 accumulator", v_acc, want);
  endtask

  task automatic run_par();
    logic signed [1023:0] want;
    int unsigned prev_cnt;
    want = '0;
    recon_mode = '0;
    for (int i = 0; i < 200; i++) begin
      logic [31:0] seen;
      bit merged;
      @(negedge clk);
      seen = '0; merged = 0;
      for (int p = 0; p < 4; p++) begin
        par_in_data[p] = 16'($urandom);
        par_in_data[p][14:7] = 8'($urandom_range(100, 115));
        par_in_valid[p] = ($urandom_range(0, 5) != 0);
        if (par_in_valid[p]) begin
          int g;
          want = want + fval(32'(par_in_data[p]), 8, 7);
          g = eff_exp(32'(par_in_data[p]), 8, 7) >> 3;
          if (seen[g]) merged = 1;
          seen[g] = 1'b1;
        end
      end
      if (merged) n_merge++;
      par_recon_start = (i == 199);
    end
    prev_cnt = d_par;
    @(negedge clk);
    par_in_valid = '0; par_recon_start = 0;
    wait (d_par != prev_cnt);
    n_exact++;
    check_val("parallel accumulator", v_par, want);
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_tc();
    run_fp8_bf16(1'b0);
    run_fp8_bf16(1'b1);
    run_log();
    run_acc();
    run_par();
    $display("mechanisms exercised:");
    need("input stalled during pass", n_stall);
    need("zero operand skipped", n_zero);
    need("subnormal operand", n_subnormal);
    need("route & add lane merge", n_merge);
    need("exact pass", n_exact);
    need("truncated pass", n_trunc);
    need("keep pass", n_keep);
    need("chained tensor pass", n_chain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
