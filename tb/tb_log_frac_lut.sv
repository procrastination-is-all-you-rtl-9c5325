// tb_log_frac_lut: every entry of the fractional part conversion table is
// compared with round(2^(MW-1) * 2^(f/2^NEF)) computed in floating point,
// for the log4.3 table (NEF = 3, MW = 8) and for a larger one (NEF = 4,
// MW = 12).
module tb_log_frac_lut;

  logic [2:0]  f3;
  logic [7:0]  m8;
  logic [3:0]  f4;
  logic [11:0] m12;
  int checks = 0, failures = 0;

  log_frac_lut                      dut8  (.ef(f3), .m(m8));
  log_frac_lut #(.NEF(4), .MW(12))  dut12 (.ef(f4), .m(m12));

  initial begin
    for (int f = 0; f < 8; f++) begin
      int want;
      f3 = 3'(f);
      #1;
      want = int'($floor(128.0 * $pow(2.0, real'(f) / 8.0) + 0.5));
      checks++;
      if (int'(m8) != want) begin
        failures++;
        $display("FAIL log4.3 entry %0d: %0d expected %0d", f, m8, want);
      end
    end
    for (int f = 0; f < 16; f++) begin
      int want;
      f4 = 4'(f);
      #1;
      want = int'($floor(2048.0 * $pow(2.0, real'(f) / 16.0) + 0.5));
      checks++;
      if (int'(m12) != want) begin
        failures++;
        $display("FAIL 12-bit entry %0d: %0d expected %0d", f, m12, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
