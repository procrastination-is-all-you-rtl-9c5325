// tb_eia_accum_core: random signed inputs are accumulated (one per cycle,
// with zeros and idle cycles mixed in) and every partial sum is then read
// through the reconstruction port and compared with a model of
//   S[e >> K] += (-1)^s * mag << (e & (2^K-1)).
// Reading with rd_clear must zero the register; clear_all must zero all.
module tb_eia_accum_core;

  localparam int EI = 5, K = 2, MW = 4, NV = 12;
  localparam int PSW = MW + (1 << K) + NV, NG = 1 << (EI - K), GW = EI - K;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sign = 0, in_zero = 0;
  logic [EI-1:0] in_exp = '0;
  logic [MW-1:0] in_mag = '0;
  logic rd_en = 0, rd_clear = 0, clear_all = 0;
  logic [GW-1:0] rd_addr = '0, in_grp;
  logic signed [PSW-1:0] rd_data;
  longint model [NG];
  int checks = 0, failures = 0;

  eia_accum_core #(.EI(EI), .K(K), .MW(MW), .NV(NV)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sign(in_sign), .in_exp(in_exp),
    .in_mag(in_mag), .in_zero(in_zero), .rd_en(rd_en), .rd_addr(rd_addr), .rd_clear(rd_clear),
    .clear_all(clear_all), .rd_data(rd_data), .in_grp(in_grp)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(input bit clr);
    for (int g = 0; g < NG; g++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = GW'(g); rd_clear = clr;
      #1;
      checks++;
      if (longint'(rd_data) != model[g]) begin
        failures++;
        $display("FAIL group %0d: %0d expected %0d", g, rd_data, model[g]);
      end
      if (clr) model[g] = 0;
    end
    @(negedge clk);
    rd_en = 0; rd_clear = 0;
  endtask

  initial begin
    for (int g = 0; g < NG; g++) model[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 9) != 0);
        in_sign  = 1'($urandom);
        in_exp   = EI'($urandom);
        in_mag   = MW'($urandom);
        in_zero  = ($urandom_range(0, 15) == 0);
        #1;
        checks++;
        if (in_grp != GW'(in_exp >> K)) begin
          failures++;
          $display("FAIL in_grp");
        end
        if (in_valid && !in_zero) begin
          longint v;
          v = longint'(in_mag) << (in_exp % (1 << K));
          model[in_exp >> K] += in_sign ? -v : v;
        end
      end
      @(negedge clk);
      in_valid = 0;
      if (round == 2) begin
        // keep the sums (no clear), then continue accumulating
        read_all(1'b0);
      end else if (round == 4) begin
        @(negedge clk); clear_all = 1;
        @(negedge clk); clear_all = 0;
        for (int g = 0; g < NG; g++) model[g] = 0;
        read_all(1'b0);
      end else begin
        read_all(1'b1);
        read_all(1'b0);   // all zero now
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
