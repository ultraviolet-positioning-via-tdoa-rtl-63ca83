// tx_frame_construction -- OOK pilot generator of one transmitter.
//
// On a start pulse the block sends the L-symbol pilot s_1..s_L (see
// uvpos_pkg::pilot_seq) as on-off keying: led_on equals s_i for the whole of
// symbol i, TICKS_PER_SYMBOL clock ticks long (10 ticks of the 10 MHz clock,
// the 1 Mbps symbol rate of the prototype).  L = 256 follows the prototype;
// the frame consisting of the pilot alone and the ignoring of a start while
// busy are this design's choices.
//
// Timing: led_on shows s_1 from the tick after start, and busy is high for
// exactly L * TICKS_PER_SYMBOL ticks.  led_on is low whenever busy is low.
module tx_frame_construction
  import uvpos_pkg::*;
#(
  parameter int unsigned L                = PILOT_LEN,
  parameter int unsigned TICKS_PER_SYMBOL = TX_TICKS_PER_SYMBOL
) (
  input  logic clk_10m,
  input  logic rst_n,
  input  logic start,
  output logic led_on,
  output logic busy
);

  localparam logic [PILOT_MAX-1:0] SEQ = pilot_seq();
  localparam int unsigned SYM_W  = $clog2(L + 1);
  localparam int unsigned TICK_W = $clog2(TICKS_PER_SYMBOL + 1);

  logic [SYM_W-1:0]  sym;
  logic [TICK_W-1:0] tick;

  initial begin
    assert (L >= 1 && L <= PILOT_MAX) else $fatal(1, "L out of range");
  end

  always_ff @(posedge clk_10m or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      sym  <= '0;
      tick <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        sym  <= '0;
        tick <= '0;
      end
    end else if (tick == TICK_W'(TICKS_PER_SYMBOL - 1)) begin
      tick <= '0;
      if (sym == SYM_W'(L - 1)) busy <= 1'b0;
      else                      sym  <= sym + 1'b1;
    end else begin
      tick <= tick + 1'b1;
    end
  end

  assign led_on = busy & SEQ[$clog2(PILOT_MAX)'(sym)];

endmodule
