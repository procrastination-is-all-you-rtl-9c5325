// tb_eia_regfile: random multi-port traffic against a reference array.
// Four ports write distinct random registers each cycle; all read ports are
// compared with the model every cycle; the synchronous clear and the reset
// are checked to zero every register.
module tb_eia_regfile;

  localparam int NP = 4, NG = 8, W = 16, AW = 3;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [NP-1:0][AW-1:0] addr;
  logic [NP-1:0]         we;
  logic [NP-1:0][W-1:0]  din, dout;
  logic [W-1:0]          model [NG];
  int checks = 0, failures = 0;

  eia_regfile #(.NP(NP), .NG(NG), .W(W), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .addr(addr), .we(we), .din(din), .dout(dout)
  );

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_reads();
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (dout[p] != model[addr[p]]) begin
        failures++;
        $display("FAIL port %0d addr %0d: %h expected %h", p, addr[p], dout[p], model[addr[p]]);
      end
    end
  endtask

  initial begin
    addr = '0; we = '0; din = '0;
    for (int g = 0; g < NG; g++) model[g] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 500; cyc++) begin
      logic [NG-1:0] used;
      @(negedge clk);
      used = '0;
      for (int p = 0; p < NP; p++) begin
        logic [AW-1:0] a;
        do a = AW'($urandom); while (used[a]);
        used[a] = 1'b1;
        addr[p] = a;
        we[p]   = 1'($urandom);
        din[p]  = W'($urandom);
      end
      clear = (cyc % 100 == 99);
      #1 check_reads();
      @(posedge clk);
      if (clear) begin
        for (int g = 0; g < NG; g++) model[g] = '0;
      end else begin
        for (int p = 0; p < NP; p++) if (we[p]) model[addr[p]] = din[p];
      end
    end
    // reset clears everything
    @(negedge clk); we = '0; clear = 0; rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++) model[g] = '0;
    for (int g = 0; g < NG; g += NP) begin
      for (int p = 0; p < NP; p++) addr[p] = AW'(g + p);
      #1 check_reads();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
