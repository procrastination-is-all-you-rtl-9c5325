// tb_fp_unpack: exhaustive check of fp_unpack for an 8-bit E4M3 layout and
// random check of the bfloat16 layout.  The expected fields are derived
// from the IEEE-style definition: value = (-1)^s * (hidden.fraction) *
// 2^(exp - bias), with subnormals using exponent 1 and hidden bit 0.
module tb_fp_unpack;

  int checks = 0, failures = 0;

  logic [7:0]  x8;
  logic        s8, z8;
  logic [3:0]  e8;
  logic [3:0]  m8;
  logic [15:0] x16;
  logic        s16, z16;
  logic [7:0]  e16;
  logic [7:0]  m16;

  fp_unpack #(.NE(4), .NM(3)) dut8  (.x(x8),  .sign(s8),  .exp(e8),  .mag(m8),  .zero(z8));
  fp_unpack                   dut16 (.x(x16), .sign(s16), .exp(e16), .mag(m16), .zero(z16));

  // expected value of an E4M3-layout word, times 2^(bias+3), as an integer
  function automatic longint ref_val8(input logic [7:0] w);
    longint mant, v;
    int     ex;
    ex   = int'(w[6:3]);
    mant = (ex == 0) ? longint'(w[2:0]) : longint'(8 + w[2:0]);
    if (ex == 0) ex = 1;
    v = mant << ex;
    return w[7] ? -v : v;
  endfunction

  initial begin
    for (int i = 0; i < 256; i++) begin
      longint got;
      x8 = 8'(i);
      #1;
      got = longint'(m8) << e8;
      if (s8) got = -got;
      checks++;
      if (got != ref_val8(x8) || z8 != (x8[6:0] == 0)) begin
        failures++;
        $display("FAIL e4m3 %02h: sign %0d exp %0d mag %0d zero %0d", x8, s8, e8, m8, z8);
      end
    end
    for (int i = 0; i < 2000; i++) begin
      x16 = 16'($urandom);
      if (i % 50 == 0) x16[14:7] = 8'h00;
      if (i % 97 == 0) x16[14:0] = '0;
      #1;
      checks++;
      if (s16 != x16[15] ||
          e16 != ((x16[14:7] == 0) ? 8'd1 : x16[14:7]) ||
          m16 != {x16[14:7] != 0, x16[6:0]} ||
          z16 != (x16[14:0] == 0)) begin
        failures++;
        $display("FAIL bf16 %04h", x16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
