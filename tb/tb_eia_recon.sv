// tb_eia_recon: feeds random signed partial sums through the reconstruction
// stage and checks that the output words and top bits equal
// sum_i psum_i * 2^(i*SB) exactly, for several sequence lengths, including
// the largest-magnitude partial sums.  Also checks the word count and that
// the result appears one cycle after the last input.
module tb_eia_recon;

  localparam int W = 20, SB = 4;

  logic clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  logic signed [W-1:0] psum = '0;
  logic [SB-1:0] bits;
  logic bits_valid, result_valid;
  logic signed [W:0] result;
  logic signed [1023:0] value;
  int unsigned nwords, ndone;
  int checks = 0, failures = 0;

  eia_recon #(.W(W), .SB(SB)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .first(first), .last(last), .psum(psum),
    .bits(bits), .bits_valid(bits_valid), .result(result), .result_valid(result_valid)
  );

  tb_collect #(.SB(SB), .RW(W+1), .GW(1)) u_col (
    .clk(clk), .rst_n(rst_n), .bits(bits), .bits_valid(bits_valid), .result(result),
    .result_valid(result_valid), .lsb_grp(1'b0), .value(value), .nwords(nwords), .ndone(ndone)
  );

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n;
      logic signed [1023:0] expect_v;
      n = 1 + (t % 13);
      expect_v = '0;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        en = 1; first = (i == 0); last = (i == n - 1);
        case (t % 3)
          0: psum = W'($urandom);
          1: psum = (i % 2) ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
          default: psum = {1'b1, {(W-1){1'b0}}};
        endcase
        expect_v = expect_v + (1024'(psum) <<< (i * SB));
      end
      @(negedge clk);
      en = 0; first = 0; last = 0;
      // result_valid was raised by the edge after the last input
      checks++;
      if (!result_valid) begin
        failures++;
        $display("FAIL result_valid not high one cycle after last");
      end
      @(negedge clk);
      checks++;
      if (value != expect_v || nwords != n) begin
        failures++;
        $display("FAIL seq %0d: got %0d (%0d words) expected %0d", t, value, nwords, expect_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
