// rx_time_difference -- arrival-time differences of the three pilots.
//
// Transmitters A, B and C start their pilots at 0, T and 2T of a round, so
// with arrival chips t_A, t_B, t_C found by the synchroniser the flying-time
// differences used by the position solver are
//     t_BA = (t_B - t_A) - T,   t_CB = (t_C - t_B) - T     (in chips, 10 ns).
// The pilots are identical, so which peak belongs to which transmitter is
// told by timing alone: a peak that comes more than ROUND_GAP chips (default
// 1.5 T) after the previous one, or the first peak after reset, opens a new
// round and is taken as A; the next two are B and C.  A round cut short by
// such a gap is discarded (round_dropped), and a fourth peak inside a round
// is ignored (extra_peak).  The formula follows the published receiver; the
// round grouping rule is this design's choice.
//
// Timing: res_valid is a one-cycle strobe in the cycle after the peak of C
// arrives.  Time stamps are taken modulo 2^32, so differences stay right
// across counter wrap-around.
module rx_time_difference
  import uvpos_pkg::*;
#(
  parameter int unsigned SLOT_CHIPS = RX_SLOT_CHIPS,
  parameter int unsigned ROUND_GAP  = RX_SLOT_CHIPS * 3 / 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  peak_valid,
  input  peak_t peak,
  output logic  res_valid,
  output tdoa_t res,
  output logic  round_dropped,
  output logic  extra_peak
);

  logic [1:0]      seen;        // peaks of the current round: 0..3
  logic [TS_W-1:0] t_a, t_b, last;
  logic [TS_W-1:0] gap;
  logic            new_round;

  assign gap       = peak.start - last;
  assign new_round = (seen == 2'd0) || (gap > TS_W'(ROUND_GAP));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen          <= '0;
      t_a           <= '0;
      t_b           <= '0;
      last          <= '0;
      res_valid     <= 1'b0;
      res           <= '0;
      round_dropped <= 1'b0;
      extra_peak    <= 1'b0;
    end else begin
      res_valid     <= 1'b0;
      round_dropped <= 1'b0;
      extra_peak    <= 1'b0;
      if (peak_valid) begin
        last <= peak.start;
        if (new_round) begin
          round_dropped <= (seen == 2'd1) || (seen == 2'd2);
          t_a  <= peak.start;
          seen <= 2'd1;
        end else begin
          unique case (seen)
            2'd1: begin
              t_b  <= peak.start;
              seen <= 2'd2;
            end
            2'd2: begin
              res.t_ba  <= $signed(t_b - t_a - TS_W'(SLOT_CHIPS));
              res.t_cb  <= $signed(peak.start - t_b - TS_W'(SLOT_CHIPS));
              res_valid <= 1'b1;
              seen      <= 2'd3;
            end
            default: extra_peak <= 1'b1;
          endcase
        end
      end
    end
  end

endmodule
