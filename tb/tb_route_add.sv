// tb_route_add: random exponent groups from a small range (so that lanes
// often share a group) and random signed mantissas.  For every distinct
// group exactly one write must be enabled, at its leftmost lane, carrying
// the sum of all mantissas of that group; WE0 is always 1; ADDR_i = e_i.
module tb_route_add;

  localparam int NP = 4, GW = 3, DW = 10, OW = DW + 2;

  logic        [NP-1:0][GW-1:0] e, addr;
  logic signed [NP-1:0][DW-1:0] m;
  logic        [NP-1:0]         we;
  logic signed [NP-1:0][OW-1:0] data;
  int checks = 0, failures = 0, merges = 0;

  route_add #(.NP(NP), .GW(GW), .DW(DW)) dut (.e(e), .m(m), .addr(addr), .we(we), .data(data));

  initial begin
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < NP; i++) begin
        e[i] = GW'($urandom_range(0, (t % 2) ? 1 : 7));
        m[i] = DW'($urandom);
      end
      #1;
      for (int i = 0; i < NP; i++) begin
        int first_lane, sum;
        first_lane = i;
        for (int j = i - 1; j >= 0; j--) if (e[j] == e[i]) first_lane = j;
        sum = 0;
        for (int j = 0; j < NP; j++) if (e[j] == e[i]) sum += int'($signed(m[j]));
        if (first_lane != i) merges++;
        checks++;
        if (addr[i] != e[i] || we[i] != (first_lane == i) ||
            (we[i] && int'($signed(data[i])) != sum)) begin
          failures++;
          $display("FAIL t %0d lane %0d: we %0d data %0d expected we %0d sum %0d",
                   t, i, we[i], $signed(data[i]), first_lane == i, sum);
        end
      end
    end
    checks++;
    if (merges == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
