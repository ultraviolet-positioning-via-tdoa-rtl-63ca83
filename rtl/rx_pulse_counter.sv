// rx_pulse_counter -- photon pulse detection and per-chip pulse counting.
//
// The PMT turns each detected photoelectron into a short analog pulse, and
// the ADC samples its magnitude at 100 MHz.  A pulse is counted when a sample
// reaches adc_thresh while the sample before it was below, i.e. on a rising
// threshold crossing; two adjacent high samples therefore give one pulse,
// which matches the roughly 10 ns dead time of the PMT.  Crossings are summed
// over SAMPLES_PER_CHIP samples to give N_t, the pulse count of chip t that
// the correlator of the synchroniser uses.
//
// Rising-edge detection in the digital domain and the 100 MHz sampling follow
// the prototype.  The ADC width, the threshold being a run-time input and one
// sample per chip (n = 100 chips per 1 us symbol) are this design's choices.
//
// Timing: chip_valid is a one-cycle strobe at the end of each chip; with
// SAMPLES_PER_CHIP = 1 it is high every cycle after reset and chip_count is
// the crossing flag of the sample presented one cycle earlier.
module rx_pulse_counter #(
  parameter int unsigned ADC_W            = 12,
  parameter int unsigned SAMPLES_PER_CHIP = 1,
  localparam int unsigned CNT_W = $clog2(SAMPLES_PER_CHIP + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ADC_W-1:0] adc_data,
  input  logic [ADC_W-1:0] adc_thresh,
  output logic             chip_valid,
  output logic [CNT_W-1:0] chip_count
);

  localparam int unsigned PH_W = (SAMPLES_PER_CHIP > 1) ? $clog2(SAMPLES_PER_CHIP) : 1;

  logic             prev_high;
  logic             crossing;
  logic [PH_W-1:0]  phase;
  logic [CNT_W-1:0] acc;

  assign crossing = (adc_data >= adc_thresh) && !prev_high;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_high  <= 1'b1;   // no pulse is counted on the first sample
      phase      <= '0;
      acc        <= '0;
      chip_valid <= 1'b0;
      chip_count <= '0;
    end else begin
      prev_high <= (adc_data >= adc_thresh);
      if (phase == PH_W'(SAMPLES_PER_CHIP - 1)) begin
        phase      <= '0;
        acc        <= '0;
        chip_valid <= 1'b1;
        chip_count <= acc + CNT_W'(crossing);
      end else begin
        phase      <= phase + 1'b1;
        acc        <= acc + CNT_W'(crossing);
        chip_valid <= 1'b0;
      end
    end
  end

endmodule
