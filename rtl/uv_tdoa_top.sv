// uv_tdoa_top -- the UV TDOA positioning system: three transmitters and one
// receiver.
//
// Transmitters A, B and C (uv_tx with slots 0, 1, 2) each run from their own
// 10 MHz atomic clock and PPS and send the same OOK pilot one slot T apart.
// Their LED modulating signals leave as led_on[2:0].  What lies between
// them and the receiver -- the LEDs, the free-space UV channel, the PMT and
// the ADC -- is analog and outside this RTL: the receiver's ADC sample bus
// comes in as adc_data.  The receiver (uv_rx, 100 MHz) finds the three
// pilots, forms t_BA and t_CB and sends them to the PC over uart_txd.
//
// Timing: see uv_tx and uv_rx; clk_10m[i], pps[i] and clk_rx are mutually
// asynchronous.
module uv_tdoa_top
  import uvpos_pkg::*;
#(
  parameter int unsigned ADC_W = 12
) (
  input  logic [2:0]               clk_10m,     // atomic clocks of A, B, C
  input  logic [2:0]               pps,         // PPS of A, B, C
  input  logic [2:0]               tx_rst_n,
  output logic [2:0]               led_on,      // modulating signals of A, B, C
  output logic [2:0]               tx_busy,
  input  logic                     clk_rx,      // 100 MHz ADC clock
  input  logic                     rx_rst_n,
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

  for (genvar i = 0; i < 3; i++) begin : g_tx
    uv_tx u_tx (
      .clk_10m(clk_10m[i]), .rst_n(tx_rst_n[i]), .pps(pps[i]), .tx_slot(2'(i)),
      .led_on(led_on[i]), .busy(tx_busy[i])
    );
  end

  uv_rx #(.ADC_W(ADC_W)) u_rx (
    .clk(clk_rx), .rst_n(rx_rst_n), .adc_data, .adc_thresh, .corr_thresh, .uart_txd,
    .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak,
    .report_busy, .report_dropped
  );

endmodule
