// tb_fp_accumulator: sums of fp32 streams at the default parameters
// (K = 4, 16 partial sums).  Each round feeds random floats, one per cycle
// (normal numbers over the whole exponent range or a narrow one, subnormals,
// signed zeros, exact cancellations), then runs an exact reconstruction.
// The reassembled result must equal the exact sum, worked out here from the
// IEEE definition of each float, and the pass must deliver max-min+1 words (result seen max-min+2 cycles
// after the start cycle).
// Inf/NaN encodings are not generated.
module tb_fp_accumulator;
  import eia_pkg::*;

  localparam int NE = 8, NM = 23, K = 4, NV = 12;
  localparam int PSW = NM + 1 + (1 << K) + NV, NG = 1 << (NE - K), GW = NE - K, SB = 1 << K;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, recon_start = 0;
  logic [31:0] in_data = '0;
  recon_mode_t recon_mode = '0;
  logic ready, bits_valid, result_valid;
  logic [SB-1:0] bits_out;
  logic signed [PSW:0] result;
  logic [GW-1:0] lsb_grp;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  int checks = 0, failures = 0;

  fp_accumulator dut (
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
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value of an fp32 word in units of 2^-(127+23)
  function automatic logic signed [1023:0] fval(input logic [31:0] w);
    logic signed [1023:0] v;
    int e;
    e = int'(w[30:23]);
    if (e == 0) v = 1024'(w[22:0]) << 1;
    else        v = 1024'({1'b1, w[22:0]}) << e;
    return w[31] ? -v : v;
  endfunction

  function automatic logic [31:0] rand_fp32(input int kind, input int elo, input int ehi);
    logic [31:0] w;
    w = $urandom;
    case (kind)
      0: w[30:23] = 8'($urandom_range(elo, ehi));
      1: w[30:23] = 8'h00;                 // subnormal
      2: w[30:0]  = '0;                    // +/- zero
      default: w[30:23] = 8'($urandom_range(1, 254));
    endcase
    return w;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 24; round++) begin
      int n, elo, ehi, mn, mx, cyc, done0;
      logic signed [1023:0] expect_v;
      logic [31:0] prev;
      n = 200 + $urandom_range(0, 400);
      elo = $urandom_range(1, 200);
      ehi = elo + $urandom_range(0, 50);
      expect_v = '0;
      mn = NG; mx = -1;
      prev = '0;
      for (int i = 0; i < n; i++) begin
        int kind;
        @(negedge clk);
        kind = $urandom_range(0, 19);
        kind = (kind < 14) ? 0 : (kind < 16) ? 1 : (kind < 17) ? 2 : 3;
        if (round % 2 == 0 && kind != 2) kind = 0;   // narrow exponent range only
        in_data  = rand_fp32(kind, elo, ehi);
        if (i % 37 == 36) in_data = prev ^ 32'h8000_0000;   // exact cancellation
        prev     = in_data;
        in_valid = 1'b1;
        recon_start = (i == n - 1);
        expect_v = expect_v + fval(in_data);
        if (in_data[30:0] != '0) begin
          int g;
          g = ((in_data[30:23] == 0) ? 1 : int'(in_data[30:23])) >> K;
          if (g < mn) mn = g;
          if (g > mx) mx = g;
        end
      end
      done0 = ndone;
      cyc = 0;
      @(negedge clk);
      in_valid = 0; recon_start = 0;
      while (ndone == done0 && cyc < 100) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (value != expect_v || nwords != mx - mn + 1 || cyc != mx - mn + 2) begin
        failures++;
        $display("FAIL round %0d: %0d expected %0d, %0d words, %0d cycles, groups %0d..%0d",
                 round, value, expect_v, nwords, cyc, mn, mx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
