// eia_seq: control of the exponent indexed accumulator's two phases.
//
// Accumulation phase (state SEQ_ACCUM): with TRACK=1 it records the lowest
// and highest exponent group written, from NT tracking ports (one per input
// lane).  Reconstruction phase (state SEQ_READ), entered on `start`: it steps
// the read address through the groups, lowest first, one per cycle, marking
// the first and last read and asking for each register to be cleared as it
// is read.
//
// Range of the pass (Sec. 2 and 2.3 of the paper):
//   TRACK=1, exact      : min group .. max group (max-min+1 cycles)
//   TRACK=1, truncated  : max(min, max-depth) .. max group
//   TRACK=0             : 0 .. NG-1 (NG cycles), or NG-1-depth .. NG-1 if
//                         truncated
// A truncated pass, unless `keep` is set, raises clear_all with the last read
// so that the groups it skipped are zeroed in the same cycle (flip-flop
// storage with a common synchronous clear).  With `keep` set nothing is
// cleared and the min/max record is kept, so accumulation can continue.
// If nothing was written since the last pass, a single read of group 0 is
// made (the result is then zero).
//
// The min/max used by `start` includes the tracking ports of the same cycle,
// so a write and the start may coincide.  `busy` is high during the pass;
// the data path must not accept numbers then.  lsb_grp holds the first group
// of the last pass: bit 0 of the first result word has exponent
// lsb_grp * 2^k.
module eia_seq
  import eia_pkg::*;
#(
  parameter int unsigned NG    = 32,
  parameter int unsigned GW    = (NG > 1) ? $clog2(NG) : 1,
  parameter int unsigned NT    = 1,
  parameter bit          TRACK = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NT-1:0]        trk_valid,
  input  logic [NT-1:0][GW-1:0] trk_grp,
  input  logic                 start,
  input  recon_mode_t          mode,
  output logic                 busy,
  output logic                 rd_valid,
  output logic [GW-1:0]        rd_addr,
  output logic                 rd_first,
  output logic                 rd_last,
  output logic                 rd_clear,
  output logic                 clear_all,
  output logic [GW-1:0]        lsb_grp
);

  seq_state_t  state;
  logic [GW-1:0] min_q, max_q, hi_q, lo_q;
  logic        seen_q;
  logic        keep_q, trunc_q;

  // min/max including this cycle's writes
  logic [GW-1:0] min_n, max_n, lo_n, hi_n;
  logic          seen_n;

  always_comb begin
    min_n  = min_q;
    max_n  = max_q;
    seen_n = seen_q;
    for (int t = 0; t < NT; t++) begin
      if (trk_valid[t]) begin
        if (!seen_n || trk_grp[t] < min_n) min_n = trk_grp[t];
        if (!seen_n || trk_grp[t] > max_n) max_n = trk_grp[t];
        seen_n = 1'b1;
      end
    end
    if (TRACK) begin
      hi_n = seen_n ? max_n : '0;
      lo_n = seen_n ? min_n : '0;
    end else begin
      hi_n = GW'(NG - 1);
      lo_n = '0;
    end
    if (mode.truncate && (32'(hi_n) - 32'(lo_n) > 32'(mode.depth)))
      lo_n = hi_n - GW'(mode.depth);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= SEQ_ACCUM;
      min_q   <= '0;
      max_q   <= '0;
      seen_q  <= 1'b0;
      hi_q    <= '0;
      lo_q    <= '0;
      rd_addr <= '0;
      lsb_grp <= '0;
      keep_q  <= 1'b0;
      trunc_q <= 1'b0;
    end else begin
      case (state)
        SEQ_ACCUM: begin
          min_q  <= min_n;
          max_q  <= max_n;
          seen_q <= seen_n;
          if (start) begin
            state   <= SEQ_READ;
            rd_addr <= lo_n;
            lo_q    <= lo_n;
            hi_q    <= hi_n;
            lsb_grp <= lo_n;
            keep_q  <= mode.keep;
            trunc_q <= mode.truncate;
          end
        end
        SEQ_READ: begin
          if (rd_addr == hi_q) begin
            state <= SEQ_ACCUM;
            if (!keep_q) seen_q <= 1'b0;
          end else begin
            rd_addr <= rd_addr + 1'b1;
          end
        end
        default: state <= SEQ_ACCUM;
      endcase
    end
  end

  always_comb begin
    busy      = (state == SEQ_READ);
    rd_valid  = busy;
    rd_first  = busy && (rd_addr == lo_q);
    rd_last   = busy && (rd_addr == hi_q);
    rd_clear  = busy && !keep_q;
    clear_all = rd_last && !keep_q && trunc_q;
  end

  // No new pass while one is running.
  always_ff @(posedge clk) begin
    if (rst_n && busy) assert (!start) else $error("eia_seq: start during reconstruction");
  end

endmodule
