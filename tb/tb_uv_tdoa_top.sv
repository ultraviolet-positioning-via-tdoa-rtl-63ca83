// tb_uv_tdoa_top -- end-to-end test of the whole positioning system at its
// default sizes (L = 256, n = 100, T = 300 us, 115200 baud).
//
// Three transmitters run from 10 MHz clocks with random phases (0..99 ns,
// the rising-edge misalignment of the atomic clocks) and share a PPS that
// this bench issues every 1.2 ms instead of every second.  A channel model
// delays each LED signal by a per-round number of chips, turns "LED on" into
// PMT pulses with probability P_ON per 10 ns sample and adds background
// pulses with probability P_BG, and presents the result as ADC samples.
// The expected time differences are worked out from the LED start times the
// bench measures and the delays it applied:
//   t_BA = (S_B + D_B) - (S_A + D_A) - 30000 chips, likewise t_CB,
// and must match within 3 chips.  Every result must also arrive over the
// serial line in a well-formed frame.  Rounds: two plain rounds, one with
// transmitter C dark (the round must be dropped), one plain, one in which
// A receives a stray PPS late in the round (880 us) (an extra peak, ignored).
`timescale 1ns/1ps
module tb_uv_tdoa_top;
  import uvpos_pkg::*;
  localparam int   P_ON_PCT = 40;
  localparam int   P_BG_PERMIL = 10;
  localparam int   NROUNDS = 5;
  localparam real  PPS_PERIOD_NS = 1_200_000.0;

  int checks = 0, failures = 0;

  logic [2:0]  clk_10m = '0, pps = '0, tx_rst_n = '0, led_on, tx_busy;
  logic        clk_rx = 0, rx_rst_n = 0;
  logic [11:0] adc_data = '0, adc_thresh = 12'd1000;
  logic signed [CORR_W-1:0] corr_thresh = 24'sd1500;
  logic        uart_txd, peak_valid, res_valid, round_dropped, extra_peak, report_busy, report_dropped;
  peak_t       peak;
  tdoa_t       res;

  uv_tdoa_top dut (
    .clk_10m, .pps, .tx_rst_n, .led_on, .tx_busy,
    .clk_rx, .rx_rst_n, .adc_data, .adc_thresh, .corr_thresh, .uart_txd,
    .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak,
    .report_busy, .report_dropped
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- clocks -----------------------------------------------------------
  int phase_ns [3];
  always #5 clk_rx = ~clk_rx;
  for (genvar i = 0; i < 3; i++) begin : g_clk
    initial begin
      phase_ns[i] = $urandom_range(0, 99);
      #(phase_ns[i] + 1);
      forever #50 clk_10m[i] = ~clk_10m[i];
    end
  end

  // ---- channel, PMT and ADC model -----------------------------------------
  int  delay_chips [3];
  bit  dark [3];
  bit  led_hist [3][4096];
  longint unsigned rx_cyc = 0;
  always @(posedge clk_rx) begin
    bit photon;
    rx_cyc <= rx_cyc + 1;
    photon = ($urandom_range(0, 999) < P_BG_PERMIL);
    for (int i = 0; i < 3; i++) begin
      led_hist[i][12'(rx_cyc % 4096)] = led_on[i] && !dark[i];
      if (rx_cyc >= longint'(delay_chips[i]) &&
          led_hist[i][12'((rx_cyc - longint'(delay_chips[i])) % 4096)] &&
          $urandom_range(0, 99) < P_ON_PCT)
        photon = 1;
    end
    adc_data <= photon ? 12'($urandom_range(2000, 4095)) : 12'($urandom_range(0, 600));
  end

  // ---- LED start times (first rise of each pilot, s_1 = 1) ---------------
  real led_start [3];
  for (genvar i = 0; i < 3; i++) begin : g_mon
    always @(posedge tx_busy[i]) led_start[i] = $realtime;
  end

  // ---- serial port (PC side) ---------------------------------------------
  logic bv, ferr;
  logic [7:0] bdata;
  tb_uart_rx #(.CPB(868)) u_pc (.clk(clk_rx), .rxd(uart_txd), .byte_valid(bv), .data(bdata), .framing_error(ferr));
  logic [7:0] frame_q [$];
  tdoa_t res_q [$];
  int nframes = 0, nferr = 0;
  always @(posedge clk_rx) begin
    if (ferr) nferr++;
    if (bv) begin
      frame_q.push_back(bdata);
      if (frame_q.size() == 10) begin
        logic [7:0] sum;
        tdoa_t got, want;
        sum = 0;
        for (int k = 1; k < 9; k++) sum += frame_q[k];
        got.t_ba = {frame_q[1], frame_q[2], frame_q[3], frame_q[4]};
        got.t_cb = {frame_q[5], frame_q[6], frame_q[7], frame_q[8]};
        check(frame_q[0] == 8'hA5 && frame_q[9] == sum, "serial frame sync and checksum");
        if (res_q.size() > 0) begin
          want = res_q.pop_front();
          check(got == want, $sformatf("serial frame %0d,%0d vs result %0d,%0d", got.t_ba, got.t_cb, want.t_ba, want.t_cb));
        end else check(0, "serial frame without result");
        nframes++;
        frame_q.delete();
      end
    end
  end

  // ---- mechanism counters and result checks --------------------------------
  int npeaks = 0, nres = 0, ndropped = 0, nextra = 0, nrepdrop = 0, npps_restart = 0;
  real exp_ba, exp_cb;
  bit  expect_result;
  always @(posedge clk_rx) if (rx_rst_n) begin
    if (peak_valid) npeaks++;
    if (round_dropped) ndropped++;
    if (extra_peak) nextra++;
    if (report_dropped) nrepdrop++;
    if (res_valid) begin
      nres++;
      res_q.push_back(res);
      $display("result: t_BA=%0d t_CB=%0d chips (expected %0.1f, %0.1f)", res.t_ba, res.t_cb, exp_ba, exp_cb);
      check(expect_result, "result only for complete rounds");
      check(real'(res.t_ba) > exp_ba - 3.0 && real'(res.t_ba) < exp_ba + 3.0, "t_BA within 3 chips");
      check(real'(res.t_cb) > exp_cb - 3.0 && real'(res.t_cb) < exp_cb + 3.0, "t_CB within 3 chips");
    end
  end

  initial begin
    real t_pps;
    for (int i = 0; i < 3; i++) begin
      delay_chips[i] = 0;
      dark[i] = 0;
    end
    #1000;
    $display("clock phases %0d %0d %0d ns", phase_ns[0], phase_ns[1], phase_ns[2]);
    tx_rst_n = '1;
    rx_rst_n = 1;
    for (int r = 0; r < NROUNDS; r++) begin
      t_pps = 10_000.0 + r * PPS_PERIOD_NS;
      #(t_pps - $realtime);
      for (int i = 0; i < 3; i++) delay_chips[i] = $urandom_range(0, 120);
      dark[2] = (r == 2);
      expect_result = (r != 2);
      pps = '1;
      #200_000 pps = '0;
      // the first pilot rise gives S_A; B and C follow; compute expectations once all started
      #(450_000 + 50_000);          // after B and C have started
      exp_ba = ((led_start[1] - led_start[0]) / 10.0 + delay_chips[1] - delay_chips[0]) - 30000.0;
      exp_cb = ((led_start[2] - led_start[1]) / 10.0 + delay_chips[2] - delay_chips[1]) - 30000.0;
      if (r == NROUNDS - 1) begin
        // stray PPS to A at 880 us: A sends again inside the round, after the
        // synchroniser has stopped ignoring the end of pilot C
        #(880_000 - 700_000);
        pps[0] = 1'b1;
        #200_000 pps[0] = 1'b0;
        npps_restart++;
      end
    end
    #2_500_000;
    $display("mechanisms: peaks=%0d results=%0d frames=%0d dropped_rounds=%0d extra_peaks=%0d stray_pps=%0d report_drops=%0d",
             npeaks, nres, nframes, ndropped, nextra, npps_restart, nrepdrop);
    check(nres == NROUNDS - 1, $sformatf("%0d results", nres));
    check(nframes == nres, $sformatf("%0d frames for %0d results", nframes, nres));
    check(nferr == 0, "no framing errors");
    check(npeaks == 3 * NROUNDS - 1 + 1, $sformatf("%0d peaks", npeaks));
    check(ndropped >= 1, "a round with a missing pilot was dropped");
    check(nextra >= 1, "a stray peak inside a round was ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
