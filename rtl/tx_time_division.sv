// tx_time_division -- PPS-aligned time-division scheduler of one transmitter.
//
// Each transmitter is clocked by the 10 MHz square wave of its atomic clock
// and receives the pulse-per-second of the satellite timing module.  The PPS
// is brought into the 10 MHz domain with a two-flop synchroniser and its
// rising edge starts a tick counter.  When the counter reaches
// tx_slot * SLOT_TICKS the block pulses frame_start for one tick, so
// transmitter A (slot 0) starts its pilot with the PPS, B one slot T later
// and C two slots later, as in the published protocol (T = 300 us, i.e. 3000
// ticks).  The counter then stops until the next PPS: one round A, B, C per
// PPS is this design's reading of the protocol, and a new PPS always restarts
// the schedule.  The slot is a strap input so the three transmitters share
// one design.
//
// Timing: counting clock edges from the first one that samples pps high as
// edge 0, frame_start is high for one tick after edge 2 + tx_slot*SLOT_TICKS
// (two synchroniser flops and the edge register).  The latency is the same in
// every transmitter, so it cancels in the time differences.  pps_seen is the
// combinational edge flag, high in the tick after edge 1.
module tx_time_division
  import uvpos_pkg::*;
#(
  parameter int unsigned SLOT_TICKS = TX_SLOT_TICKS
) (
  input  logic       clk_10m,
  input  logic       rst_n,
  input  logic       pps,
  input  logic [1:0] tx_slot,
  output logic       frame_start,
  output logic       pps_seen
);

  localparam int unsigned CNT_W = $clog2(3 * SLOT_TICKS + 1);

  logic [2:0]       pps_sr;      // two synchroniser stages and the edge register
  logic             counting;
  logic [CNT_W-1:0] tick;
  logic [CNT_W-1:0] slot_at;

  assign pps_seen = pps_sr[1] & ~pps_sr[2];
  assign slot_at  = CNT_W'(tx_slot) * CNT_W'(SLOT_TICKS);

  always_ff @(posedge clk_10m or negedge rst_n) begin
    if (!rst_n) begin
      pps_sr      <= '0;
      counting    <= 1'b0;
      tick        <= '0;
      frame_start <= 1'b0;
    end else begin
      pps_sr      <= {pps_sr[1:0], pps};
      frame_start <= 1'b0;
      if (pps_seen) begin
        counting <= 1'b1;
        tick     <= '0;
      end else if (counting) begin
        tick <= tick + 1'b1;
      end
      // compare the count of the tick in flight; pps_seen restarts at 0
      if (pps_seen && slot_at == '0) begin
        frame_start <= 1'b1;
        counting    <= 1'b0;
      end else if (!pps_seen && counting && tick + 1'b1 == slot_at) begin
        frame_start <= 1'b1;
        counting    <= 1'b0;
      end
    end
  end

endmodule
