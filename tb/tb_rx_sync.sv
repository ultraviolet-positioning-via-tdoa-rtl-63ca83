// tb_rx_sync -- checks the synchroniser at a reduced size (L = 32, n = 4,
// two-bit chip counts).  Every correlator output is compared with the
// correlation computed directly from the chip history, on random counts;
// then noise-free pilots are planted at known start chips and each must give
// exactly one peak with that start, the full correlation value and a report
// no later than SEARCH_WIN + 3 cycles after the last pilot chip.
`timescale 1ns/1ps
module tb_rx_sync;
  import uvpos_pkg::*;
  localparam int L = 32, N = 4, SW = 8, BL = 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic chip_valid;
  logic [1:0] chip_count;
  logic signed [CORR_W-1:0] thr;
  logic peak_valid, corr_valid;
  peak_t peak;
  logic signed [CORR_W-1:0] corr;
  logic [TS_W-1:0] corr_start;
  logic [255:0] s;
  int hist [0:9999];
  int cyc = 0;         // chip index of the chip presented in this cycle

  rx_sync #(.L(L), .N(N), .CNT_W(2), .SEARCH_WIN(SW), .BLANK_LEN(BL)) dut (
    .clk, .rst_n, .chip_valid, .chip_count, .corr_thresh(thr),
    .peak_valid, .peak, .corr_valid, .corr, .corr_start
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_corr(int start);
    int c = 0;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < N; j++) begin
        int p = start + N * i + j;
        int v = (p >= 0 && p < 10000) ? hist[p] : 0;
        c += s[i] ? v : -v;
      end
    return c;
  endfunction

  // compare the correlator output in every cycle
  int corr_errs = 0, corr_checked = 0;
  always @(posedge clk) if (rst_n && corr_valid) begin
    automatic int st = int'($signed(corr_start));
    corr_checked++;
    if (int'(corr) != ref_corr(st)) begin
      corr_errs++;
      if (corr_errs < 5) $display("corr mismatch start %0d: %0d vs %0d", st, corr, ref_corr(st));
    end
  end

  int npeaks = 0;
  int pk_start [8];
  int pk_val [8];
  int pk_cyc [8];
  always @(posedge clk) if (rst_n && peak_valid) begin
    if (npeaks < 8) begin
      pk_start[npeaks] = int'(peak.start);
      pk_val[npeaks] = int'(peak.value);
      pk_cyc[npeaks] = cyc;
    end
    npeaks++;
  end

  initial begin
    logic [7:0] r;
    int ones, starts [3];
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      s[i] = r[0];
      r = {r[6:0], r[7] ^ r[5] ^ r[4] ^ r[3]};
    end
    s[255] = 0;
    ones = 0;
    for (int i = 0; i < L; i++) ones += s[i];
    foreach (hist[k]) hist[k] = 0;
    starts = '{4000, 4700, 5400};
    thr = 24'sd1000000;
    chip_valid = 0; chip_count = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chip_valid = 1;
    for (int t = 0; t < 6500; t++) begin
      int v;
      if (t < 3000) v = $urandom_range(0, 3);
      else begin
        v = 0;
        foreach (starts[k])
          if (t >= starts[k] && t < starts[k] + L * N) v = s[(t - starts[k]) / N] ? 1 : 0;
        if (t >= 3500 && t < 3520) v = 1;       // short burst, below threshold
      end
      if (t == 3000) thr = CORR_W'(ones * N / 2);
      hist[t] = v;
      chip_count = 2'(v);
      cyc = t;
      @(negedge clk);
    end
    chip_valid = 0;
    repeat (5) @(negedge clk);
    check(corr_errs == 0, $sformatf("%0d correlation mismatches", corr_errs));
    check(corr_checked >= 6500, $sformatf("%0d correlations checked", corr_checked));
    check(npeaks == 3, $sformatf("%0d peaks", npeaks));
    for (int k = 0; k < 3 && k < npeaks; k++) begin
      check(pk_start[k] == starts[k], $sformatf("peak %0d start %0d exp %0d", k, pk_start[k], starts[k]));
      check(pk_val[k] == ones * N, $sformatf("peak %0d value %0d exp %0d", k, pk_val[k], ones * N));
      check(pk_cyc[k] - (starts[k] + L * N - 1) <= SW + 3 && pk_cyc[k] > starts[k] + L * N - 1,
            $sformatf("peak %0d latency %0d", k, pk_cyc[k] - (starts[k] + L * N - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
