// tb_eia_formats: exact summation across the float formats and group sizes
// of the accumulator's gate count study: fp32, bfloat16, fp16, fp8 E5M2,
// fp8 E4M3 and fp8 E3M4, each with every K from 0 (one partial sum per
// exponent) to NE (a single wide fixed point register, the Kulisch
// accumulator): 39 fp_accumulator configurations running side by side.
// Each gets random summations checked against the exact sum and the number
// of result words (see tb_fp_acc_run).  bfloat16 with K = 3 and fp32 with
// K = 4 also add one long sequence of 20,000 numbers.
module tb_eia_formats;

  localparam int NF = 6;
  localparam int NE_T [NF] = '{8, 8, 5, 5, 4, 3};
  localparam int NM_T [NF] = '{23, 7, 10, 2, 3, 4};

  logic clk = 0, rst_n = 0;
  logic [NF-1:0][8:0] done;
  int checks_a [NF][9];
  int fails_a  [NF][9];
  int checks = 0, failures = 0;

  for (genvar f = 0; f < NF; f++) begin : g_fmt
    for (genvar k = 0; k <= 8; k++) begin : g_k
      if (k <= NE_T[f]) begin : g_run
        localparam int NL = ((f == 1 && k == 3) || (f == 0 && k == 4)) ? 20000 : 0;
        tb_fp_acc_run #(.NE(NE_T[f]), .NM(NM_T[f]), .K(k), .ROUNDS(4), .NLONG(NL)) u_run (
          .clk(clk), .rst_n(rst_n), .done(done[f][k]), .checks(checks_a[f][k]), .failures(fails_a[f][k])
        );
      end else begin : g_none
        assign done[f][k] = 1'b1;
        assign checks_a[f][k] = 0;
        assign fails_a[f][k] = 0;
      end
    end
  end

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog: not all configurations finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (&done);
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int k = 0; k <= 8; k++) begin
        checks   += checks_a[f][k];
        failures += fails_a[f][k];
      end
    if (checks != 4 * 39 + 2) begin
      failures++;
      $display("FAIL: %0d summations checked, expected %0d", checks, 4 * 39 + 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
