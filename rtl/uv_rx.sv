// uv_rx -- receiver FPGA of the UV TDOA positioning system.
//
// The chain of the prototype's receiver, all in the 100 MHz ADC clock
// domain: the pulse counter turns ADC samples of the PMT output into per-chip
// photon counts, the synchroniser correlates them with the pilot and reports
// the arrival chip of each transmitter's pilot, the time-difference unit
// groups three arrivals into t_BA and t_CB, and the serial report sends them
// to the PC that solves for the position.  The two thresholds are run-time
// inputs (pins or a configuration register in a real board).  The status
// strobes (peak_valid, res_valid, round_dropped, extra_peak, report_dropped)
// are brought out for observation.
//
// Timing: a result is ready about SEARCH_WIN chips (2 us) after the end of
// pilot C plus a few cycles, and its serial frame follows at once.
module uv_rx
  import uvpos_pkg::*;
#(
  parameter int unsigned ADC_W        = 12,
  parameter int unsigned L            = PILOT_LEN,
  parameter int unsigned N            = CHIPS_PER_SYMBOL,
  parameter int unsigned SLOT_CHIPS   = RX_SLOT_CHIPS,
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [ADC_W-1:0]         adc_data,
  input  logic [ADC_W-1:0]         adc_thresh,
  input  logic signed [CORR_W-1:0] corr_thresh,
  output logic                     uart_txd,
  output logic                     peak_valid,
  output peak_t                    peak,
  output logic                     res_valid,
  output tdoa_t                    res,
  output logic                     round_dropped,
  output logic                     extra_peak,
  output logic                     report_busy,
  output logic                     report_dropped
);

  logic                     chip_valid;
  logic [0:0]               chip_count;
  logic                     corr_valid;
  logic signed [CORR_W-1:0] corr;
  logic [TS_W-1:0]          corr_start;

  rx_pulse_counter #(.ADC_W(ADC_W), .SAMPLES_PER_CHIP(1)) u_pulse (
    .clk, .rst_n, .adc_data, .adc_thresh, .chip_valid, .chip_count
  );

  rx_sync #(.L(L), .N(N), .CNT_W(1)) u_sync (
    .clk, .rst_n, .chip_valid, .chip_count, .corr_thresh,
    .peak_valid, .peak, .corr_valid, .corr, .corr_start
  );

  rx_time_difference #(.SLOT_CHIPS(SLOT_CHIPS), .ROUND_GAP(SLOT_CHIPS * 3 / 2)) u_tdoa (
    .clk, .rst_n, .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak
  );

  rx_serial_report #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_report (
    .clk, .rst_n, .res_valid, .res, .uart_txd, .busy(report_busy), .dropped(report_dropped)
  );

endmodule
