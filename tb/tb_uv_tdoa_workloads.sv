// tb_uv_tdoa_workloads -- the whole system, at its default sizes, on the
// transmitter layouts of the published evaluation: the simulation layout
// A(0,50) B(60,-50) C(-50,-50) m and the three outdoor layouts
// I:   A(30.2,53.9) B(0,0)       C(60.7,0)
// II:  A(0,0)       B(75.6,0)    C(32.2,76.6)
// III: A(0,0)       B(128.6,122.8) C(247.1,0).
// In the simulation layout the receiver visits the 81 points of the grid
// x, y in {-40, -30, .., 40} m; the outdoor layouts, whose receiver points
// are not published, use the triangle centroid plus (+7 m, -4 m).  The
// channel model delays each LED signal by its flight time
// (1 ns resolution), turns light into PMT pulses (40 % per 10 ns sample while
// lit, 1 % background) and feeds ADC samples to the receiver.
//
// Each point is run twice: with the three 10 MHz clocks aligned (perfectly
// synchronised transmitters) and with each clock edge shifted by a random
// 0..99 ns before the round (the atomic-clock edge error).  For every round
// the measured t_BA and t_CB must match the flight times plus the measured
// transmitter start offsets within 3 chips.  A model of the PC then solves
// the two hyperbola equations for (x, y) by Gauss-Newton iteration and prints
// the position error; with aligned clocks it must stay below 15 m.
`timescale 1ns/1ps
module tb_uv_tdoa_workloads;
  import uvpos_pkg::*;
  localparam real C_M_PER_NS = 0.299792458;
  localparam int  NGEO = 4;
  localparam int  NGRID = 9;
  localparam real PPS_PERIOD_NS = 1_200_000.0;

  int checks = 0, failures = 0;

  logic [2:0]  clk_10m = '0, pps = '0, tx_rst_n = '0, led_on, tx_busy;
  logic        clk_rx = 0, rx_rst_n = 0;
  logic [11:0] adc_data = '0;
  logic        uart_txd, peak_valid, res_valid, round_dropped, extra_peak, report_busy, report_dropped;
  peak_t       peak;
  tdoa_t       res;

  uv_tdoa_top dut (
    .clk_10m, .pps, .tx_rst_n, .led_on, .tx_busy,
    .clk_rx, .rx_rst_n, .adc_data, .adc_thresh(12'd1000), .corr_thresh(24'sd1500), .uart_txd,
    .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak,
    .report_busy, .report_dropped
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- layouts -------------------------------------------------------------
  real gx [NGEO][3] = '{'{0.0, 60.0, -50.0}, '{30.2, 0.0, 60.7}, '{0.0, 75.6, 32.2}, '{0.0, 128.6, 247.1}};
  real gy [NGEO][3] = '{'{50.0, -50.0, -50.0}, '{53.9, 0.0, 0.0}, '{0.0, 0.0, 76.6}, '{0.0, 122.8, 0.0}};
  string gname [NGEO] = '{"simulation layout", "experiment I", "experiment II", "experiment III"};

  // ---- clocks: 10 MHz with a per-round extra edge delay ----------------------
  int  shift_ns [3];
  bit  shift_req [3];
  always #5 clk_rx = ~clk_rx;
  for (genvar i = 0; i < 3; i++) begin : g_clk
    initial begin
      #1;
      forever begin
        #50 clk_10m[i] = ~clk_10m[i];
        if (!clk_10m[i] && shift_req[i]) begin
          #(shift_ns[i]);
          shift_req[i] = 0;
        end
      end
    end
  end

  // ---- channel with 1 ns delay resolution -----------------------------------
  int  delay_ns [3];
  bit  hist [3][16384];
  longint unsigned tns = 0;
  initial forever begin
    #1;
    tns++;
    for (int i = 0; i < 3; i++) hist[i][14'(tns % 16384)] = led_on[i];
  end
  always @(posedge clk_rx) begin
    bit photon;
    photon = ($urandom_range(0, 999) < 10);
    for (int i = 0; i < 3; i++)
      if (tns >= longint'(delay_ns[i]) && hist[i][14'((tns - longint'(delay_ns[i])) % 16384)] &&
          $urandom_range(0, 99) < 40)
        photon = 1;
    adc_data <= photon ? 12'($urandom_range(2000, 4095)) : 12'($urandom_range(0, 600));
  end

  real led_start [3];
  for (genvar i = 0; i < 3; i++) begin : g_mon
    always @(posedge tx_busy[i]) led_start[i] = $realtime;
  end

  // ---- PC model: solve r21, r32 for (x, y) -----------------------------------
  function automatic real range_m(real x0, real y0, real x1, real y1);
    return $sqrt((x1 - x0) * (x1 - x0) + (y1 - y0) * (y1 - y0));
  endfunction

  task automatic solve_xy(input int g, input real r21, input real r32, output real x, output real y);
    x = (gx[g][0] + gx[g][1] + gx[g][2]) / 3.0;
    y = (gy[g][0] + gy[g][1] + gy[g][2]) / 3.0;
    for (int it = 0; it < 30; it++) begin
      real d1, d2, d3, f1, f2, a11, a12, a21, a22, det, dx, dy;
      d1 = range_m(x, y, gx[g][0], gy[g][0]);
      d2 = range_m(x, y, gx[g][1], gy[g][1]);
      d3 = range_m(x, y, gx[g][2], gy[g][2]);
      f1 = (d2 - d1) - r21;
      f2 = (d3 - d2) - r32;
      a11 = (x - gx[g][1]) / d2 - (x - gx[g][0]) / d1;
      a12 = (y - gy[g][1]) / d2 - (y - gy[g][0]) / d1;
      a21 = (x - gx[g][2]) / d3 - (x - gx[g][1]) / d2;
      a22 = (y - gy[g][2]) / d3 - (y - gy[g][1]) / d2;
      det = a11 * a22 - a12 * a21;
      if (det == 0.0) break;
      dx = ( a22 * f1 - a12 * f2) / det;
      dy = (-a21 * f1 + a11 * f2) / det;
      x = x - dx;
      y = y - dy;
    end
  endtask

  // ---- rounds: (layout, receiver point, clock mode) --------------------------
  // The simulation layout is evaluated on the 9 x 9 grid x, y in
  // {-40, -30, .., 40} m; the outdoor layouts, whose receiver points are not
  // listed, at centroid + (7, -4) m.  All aligned-clock rounds come first:
  // edge shifts accumulate, so once applied the clocks stay misaligned.
  localparam int NPTS    = NGRID * NGRID + NGEO - 1;
  localparam int NROUNDS = 2 * NPTS;
  int  r_g [NROUNDS];
  real r_x [NROUNDS], r_y [NROUNDS];
  bit  r_ideal [NROUNDS];

  initial begin
    int k;
    k = 0;
    for (int m = 0; m < 2; m++) begin
      for (int p = 0; p < NGRID * NGRID; p++) begin
        r_g[k] = 0;
        r_x[k] = -40.0 + 10.0 * (p % NGRID);
        r_y[k] = -40.0 + 10.0 * (p / NGRID);
        r_ideal[k] = (m == 0);
        k++;
      end
      for (int g = 1; g < NGEO; g++) begin
        r_g[k] = g;
        r_x[k] = (gx[g][0] + gx[g][1] + gx[g][2]) / 3.0 + 7.0;
        r_y[k] = (gy[g][0] + gy[g][1] + gy[g][2]) / 3.0 - 4.0;
        r_ideal[k] = (m == 0);
        k++;
      end
    end
  end

  // ---- results ----------------------------------------------------------------
  int  nres = 0, cur_g = 0;
  bit  cur_ideal = 1;
  real exp_ba, exp_cb, rx_x, rx_y;
  real err_sum [NGEO][2];
  int  err_cnt [NGEO][2];
  initial foreach (err_sum[g, m]) begin
    err_sum[g][m] = 0.0;
    err_cnt[g][m] = 0;
  end
  always @(posedge clk_rx) if (rx_rst_n && res_valid) begin
    real x, y, e;
    int  m;
    nres++;
    check(real'(res.t_ba) > exp_ba - 3.0 && real'(res.t_ba) < exp_ba + 3.0,
          $sformatf("%s: t_BA %0d exp %0.1f", gname[cur_g], res.t_ba, exp_ba));
    check(real'(res.t_cb) > exp_cb - 3.0 && real'(res.t_cb) < exp_cb + 3.0,
          $sformatf("%s: t_CB %0d exp %0.1f", gname[cur_g], res.t_cb, exp_cb));
    solve_xy(cur_g, real'(res.t_ba) * 10.0 * C_M_PER_NS, real'(res.t_cb) * 10.0 * C_M_PER_NS, x, y);
    e = range_m(x, y, rx_x, rx_y);
    m = cur_ideal ? 0 : 1;
    err_sum[cur_g][m] += e;
    err_cnt[cur_g][m]++;
    $display("%s, %s: t_BA=%0d t_CB=%0d chips, position (%0.2f, %0.2f), true (%0.2f, %0.2f), error %0.2f m",
             gname[cur_g], cur_ideal ? "aligned clocks" : "clock edge error", res.t_ba, res.t_cb,
             x, y, rx_x, rx_y, e);
    if (cur_ideal) check(e < 15.0, $sformatf("%s: position error %0.2f m", gname[cur_g], e));
  end

  initial begin
    real t_pps;
    #1000;
    tx_rst_n = '1;
    rx_rst_n = 1;
    for (int r = 0; r < NROUNDS; r++) begin
      int g;
      g = r_g[r];
      t_pps = 200_000.0 + r * PPS_PERIOD_NS;
      // clock edge misalignment, applied well before the PPS
      #(t_pps - 150_000.0 - $realtime);
      for (int i = 0; i < 3; i++) begin
        shift_ns[i]  = r_ideal[r] ? 0 : $urandom_range(0, 99);
        shift_req[i] = !r_ideal[r];
      end
      rx_x = r_x[r];
      rx_y = r_y[r];
      for (int i = 0; i < 3; i++) delay_ns[i] = int'(range_m(rx_x, rx_y, gx[g][i], gy[g][i]) / C_M_PER_NS);
      #(t_pps - $realtime);
      cur_g = g;
      cur_ideal = r_ideal[r];
      pps = '1;
      #200_000 pps = '0;
      #500_000;
      exp_ba = ((led_start[1] - led_start[0]) + delay_ns[1] - delay_ns[0]) / 10.0 - 30000.0;
      exp_cb = ((led_start[2] - led_start[1]) + delay_ns[2] - delay_ns[1]) / 10.0 - 30000.0;
    end
    #1_500_000;
    for (int g = 0; g < NGEO; g++)
      $display("mean position error, %s, %0d point(s): aligned clocks %0.2f m, clock edge error %0.2f m",
               gname[g], err_cnt[g][0], err_sum[g][0] / err_cnt[g][0], err_sum[g][1] / err_cnt[g][1]);
    check(nres == NROUNDS, $sformatf("%0d results", nres));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #260ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
