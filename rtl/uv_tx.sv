// uv_tx -- transmitter FPGA of the UV TDOA positioning system.
//
// The chain of the prototype's transmitter: the PPS from the satellite timing
// module and the 10 MHz atomic clock drive the time-division scheduler, whose
// start pulse makes the frame constructor send the OOK pilot; led_on is the
// modulating signal of the 3x3 UV LED array.  The three transmitters A, B, C
// run this same design with tx_slot = 0, 1, 2.
//
// Timing: counting clock edges from the first one that samples pps high as
// edge 0, led_on shows s_1 after edge 3 + tx_slot*T (T = 3000 ticks) and the
// pilot lasts L = 256 symbols of 10 ticks.
module uv_tx
  import uvpos_pkg::*;
#(
  parameter int unsigned SLOT_TICKS       = TX_SLOT_TICKS,
  parameter int unsigned L                = PILOT_LEN,
  parameter int unsigned TICKS_PER_SYMBOL = TX_TICKS_PER_SYMBOL
) (
  input  logic       clk_10m,
  input  logic       rst_n,
  input  logic       pps,
  input  logic [1:0] tx_slot,
  output logic       led_on,
  output logic       busy
);

  logic frame_start;
  logic pps_seen;

  tx_time_division #(.SLOT_TICKS(SLOT_TICKS)) u_time_division (
    .clk_10m, .rst_n, .pps, .tx_slot, .frame_start, .pps_seen
  );

  tx_frame_construction #(.L(L), .TICKS_PER_SYMBOL(TICKS_PER_SYMBOL)) u_frame (
    .clk_10m, .rst_n, .start(frame_start), .led_on, .busy
  );

endmodule
