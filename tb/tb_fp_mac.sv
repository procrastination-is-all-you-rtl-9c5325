// tb_fp_mac: runs the three floating point MAC configurations the design
// targets, fp8 E4M3 (K = 0), fp8 E5M2 (K = 0) and bfloat16 (K = 3), through
// tb_fp_mac_run: exact sums of products, one product per cycle, exact and
// truncated reconstruction.
module tb_fp_mac;

  logic clk = 0, rst_n = 0;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;

  tb_fp_mac_run #(.NE(4), .NM(3), .K(0)) r_e4m3 (.clk(clk), .rst_n(rst_n), .done(d0), .checks(c0), .failures(f0));
  tb_fp_mac_run #(.NE(5), .NM(2), .K(0)) r_e5m2 (.clk(clk), .rst_n(rst_n), .done(d1), .checks(c1), .failures(f1));
  tb_fp_mac_run #(.NE(8), .NM(7), .K(3)) r_bf16 (.clk(clk), .rst_n(rst_n), .done(d2), .checks(c2), .failures(f2));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end

endmodule
