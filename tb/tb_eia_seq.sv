// tb_eia_seq: checks the reconstruction sequencer.  Random groups are
// written through two tracking ports; at `start` the read addresses must
// run from the lowest to the highest group written, one per cycle, with
// first/last/clear flags, for exact, truncated and keep passes.  A second
// instance without tracking must sweep all groups.
module tb_eia_seq;
  import eia_pkg::*;

  localparam int NG = 16, GW = 4, NT = 2;

  logic clk = 0, rst_n = 0;
  logic [NT-1:0] trk_valid = '0;
  logic [NT-1:0][GW-1:0] trk_grp = '0;
  logic start = 0, start0 = 0;
  recon_mode_t mode = '0;
  logic busy, rd_valid, rd_first, rd_last, rd_clear, clear_all;
  logic [GW-1:0] rd_addr, lsb_grp;
  logic busy0, rd_valid0, rd_first0, rd_last0, rd_clear0, clear_all0;
  logic [GW-1:0] rd_addr0, lsb_grp0;
  int checks = 0, failures = 0;

  eia_seq #(.NG(NG), .GW(GW), .NT(NT), .TRACK(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .trk_valid(trk_valid), .trk_grp(trk_grp), .start(start),
    .mode(mode), .busy(busy), .rd_valid(rd_valid), .rd_addr(rd_addr), .rd_first(rd_first),
    .rd_last(rd_last), .rd_clear(rd_clear), .clear_all(clear_all), .lsb_grp(lsb_grp)
  );

  eia_seq #(.NG(NG), .GW(GW), .NT(NT), .TRACK(1'b0)) dut0 (
    .clk(clk), .rst_n(rst_n), .trk_valid(trk_valid), .trk_grp(trk_grp), .start(start0),
    .mode(mode), .busy(busy0), .rd_valid(rd_valid0), .rd_addr(rd_addr0), .rd_first(rd_first0),
    .rd_last(rd_last0), .rd_clear(rd_clear0), .clear_all(clear_all0), .lsb_grp(lsb_grp0)
  );

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: %0d expected %0d at %0t", what, got, want, $time);
    end
  endtask

  // one pass of the tracking instance; lo..hi expected
  task automatic run_pass(input int lo, input int hi, input bit trunc, input bit keep);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0; trk_valid = '0;
    for (int g = lo; g <= hi; g++) begin
      expect_bit(rd_valid, 1'b1, "rd_valid");
      checks++;
      if (rd_addr != GW'(g)) begin
        failures++;
        $display("FAIL rd_addr %0d expected %0d", rd_addr, g);
      end
      expect_bit(rd_first, g == lo, "rd_first");
      expect_bit(rd_last, g == hi, "rd_last");
      expect_bit(rd_clear, !keep, "rd_clear");
      expect_bit(clear_all, (g == hi) && trunc && !keep, "clear_all");
      @(negedge clk);
    end
    expect_bit(busy, 1'b0, "busy after pass");
    checks++;
    if (lsb_grp != GW'(lo)) begin
      failures++;
      $display("FAIL lsb_grp %0d expected %0d", lsb_grp, lo);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int mn, mx, lo, n, depth;
      bit trunc, keep;
      mn = NG; mx = -1;
      n = 1 + $urandom_range(0, 9);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        for (int p = 0; p < NT; p++) begin
          trk_valid[p] = 1'($urandom);
          trk_grp[p]   = GW'($urandom);
          if (i == 0 && p == 0) trk_valid[p] = 1'b1;
          if (trk_valid[p]) begin
            if (int'(trk_grp[p]) < mn) mn = int'(trk_grp[p]);
            if (int'(trk_grp[p]) > mx) mx = int'(trk_grp[p]);
          end
        end
      end
      trunc = (t % 4 == 1);
      keep  = (t % 4 == 3);
      depth = $urandom_range(0, 5);
      mode.truncate = trunc;
      mode.keep     = keep;
      mode.depth    = DEPTH_W'(depth);
      lo = (trunc && (mx - mn > depth)) ? mx - depth : mn;
      // the last tracking cycle coincides with start: it must be counted
      run_pass(lo, mx, trunc, keep);
      if (keep) begin
        // record kept: a pass with no new writes covers the same range
        mode.keep = 1'b0;
        mode.truncate = 1'b0;
        run_pass(mn, mx, 1'b0, 1'b0);
      end
    end
    // nothing written: one read of group 0
    mode = '0;
    run_pass(0, 0, 1'b0, 1'b0);
    // untracked instance sweeps all groups
    @(negedge clk);
    start0 = 1;
    @(negedge clk);
    start0 = 0;
    for (int g = 0; g < NG; g++) begin
      checks++;
      if (!rd_valid0 || rd_addr0 != GW'(g) || rd_first0 != (g == 0) || rd_last0 != (g == NG - 1)) begin
        failures++;
        $display("FAIL untracked sweep at group %0d", g);
      end
      @(negedge clk);
    end
    expect_bit(busy0, 1'b0, "untracked busy after sweep");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
