// tb_fp_mult_stage: random bfloat16 and fp8 E4M3 operand pairs.  The
// product (-1)^s * mag * 2^exp produced by the stage must equal the exact
// product of the two operand values, each computed here from its IEEE
// definition, and the zero flag must match.
module tb_fp_mult_stage;

  logic [15:0] a16, b16;
  logic        s16, z16;
  logic [8:0]  e16;
  logic [15:0] m16;
  logic [7:0]  a8, b8;
  logic        s8, z8;
  logic [4:0]  e8;
  logic [7:0]  m8;
  int checks = 0, failures = 0;

  fp_mult_stage                   dut16 (.a(a16), .b(b16), .sign(s16), .exp(e16), .mag(m16), .zero(z16));
  fp_mult_stage #(.NE(4), .NM(3)) dut8  (.a(a8),  .b(b8),  .sign(s8),  .exp(e8),  .mag(m8),  .zero(z8));

  // value scaled by 2^(bias+nm): integer
  function automatic logic signed [1023:0] val(input logic [15:0] w, input int ne, input int nm);
    logic signed [1023:0] v;
    int e;
    logic [15:0] f;
    e = int'((w >> nm) & ((1 << ne) - 1));
    f = w & 16'((1 << nm) - 1);
    v = (e == 0) ? (1024'(f) << 1) : ((1024'(f) + (1024'(1) << nm)) << e);
    return w[ne+nm] ? -v : v;
  endfunction

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic signed [1023:0] got, want;
      a16 = 16'($urandom); b16 = 16'($urandom);
      a8 = 8'($urandom);   b8 = 8'($urandom);
      if (i % 20 == 0) a16[14:0] = '0;
      if (i % 21 == 0) b8[6:0] = '0;
      #1;
      got  = 1024'(m16) << e16;
      if (s16) got = -got;
      want = val(a16, 8, 7) * val(b16, 8, 7);
      checks++;
      if (got != want || z16 != (a16[14:0] == 0 || b16[14:0] == 0)) begin
        failures++;
        $display("FAIL bf16 %h * %h", a16, b16);
      end
      got  = 1024'(m8) << e8;
      if (s8) got = -got;
      want = val(16'(a8), 4, 3) * val(16'(b8), 4, 3);
      checks++;
      if (got != want || z8 != (a8[6:0] == 0 || b8[6:0] == 0)) begin
        failures++;
        $display("FAIL e4m3 %h * %h", a8, b8);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
