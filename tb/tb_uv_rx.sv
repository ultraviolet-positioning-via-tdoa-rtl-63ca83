// tb_uv_rx -- receiver FPGA at a reduced size (L = 64, n = 8, T = 1000
// chips, 8 clocks per serial bit).  The bench plays the channel: for each
// round it places the pilots of A, B and C at chosen arrival chips, emits a
// PMT pulse sample with probability 50 % per chip of a 1-symbol and 1 % in
// the background, and feeds the samples to the ADC input.  Each result must
// equal t_B - t_A - T and t_C - t_B - T within 2 chips, arrive no later than
// 2n + 8 cycles after the last chip of pilot C, and come out of the serial
// port as a well-formed frame with the same values.
`timescale 1ns/1ps
module tb_uv_rx;
  import uvpos_pkg::*;
  localparam int L = 64, N = 8, T = 1000, CPB = 8, NROUNDS = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [11:0] adc;
  logic uart_txd, peak_valid, res_valid, round_dropped, extra_peak, report_busy, report_dropped;
  peak_t peak;
  tdoa_t res;
  logic [255:0] s;

  uv_rx #(.L(L), .N(N), .SLOT_CHIPS(T), .CLKS_PER_BIT(CPB)) dut (
    .clk, .rst_n, .adc_data(adc), .adc_thresh(12'd1000), .corr_thresh(24'sd40), .uart_txd,
    .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak, .report_busy, .report_dropped
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic bv, ferr;
  logic [7:0] bdata;
  tb_uart_rx #(.CPB(CPB)) u_pc (.clk, .rxd(uart_txd), .byte_valid(bv), .data(bdata), .framing_error(ferr));

  int exp_ba [NROUNDS], exp_cb [NROUNDS], c_end [NROUNDS];
  int nres = 0, nframes = 0;
  longint cyc = 0;          // index of the chip presented to the ADC in this cycle
  logic [7:0] fq [$];

  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      if (nres < NROUNDS) begin
        check(res.t_ba >= exp_ba[nres] - 2 && res.t_ba <= exp_ba[nres] + 2,
              $sformatf("round %0d t_BA %0d exp %0d", nres, res.t_ba, exp_ba[nres]));
        check(res.t_cb >= exp_cb[nres] - 2 && res.t_cb <= exp_cb[nres] + 2,
              $sformatf("round %0d t_CB %0d exp %0d", nres, res.t_cb, exp_cb[nres]));
        check(cyc - c_end[nres] <= 2 * N + 8, $sformatf("round %0d latency %0d", nres, cyc - c_end[nres]));
      end
      nres++;
    end
    if (bv) begin
      fq.push_back(bdata);
      if (fq.size() == 10) begin
        logic [7:0] sum;
        sum = 0;
        for (int k = 1; k < 9; k++) sum += fq[k];
        check(fq[0] == 8'hA5 && fq[9] == sum, "frame sync and checksum");
        if (nframes < NROUNDS) begin
          check($signed({fq[1], fq[2], fq[3], fq[4]}) >= exp_ba[nframes] - 2 &&
                $signed({fq[1], fq[2], fq[3], fq[4]}) <= exp_ba[nframes] + 2, "frame t_BA");
          check($signed({fq[5], fq[6], fq[7], fq[8]}) >= exp_cb[nframes] - 2 &&
                $signed({fq[5], fq[6], fq[7], fq[8]}) <= exp_cb[nframes] + 2, "frame t_CB");
        end
        nframes++;
        fq.delete();
      end
    end
  end

  initial begin
    logic [7:0] r;
    int arr [3];
    int base;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      s[i] = r[0];
      r = {r[6:0], r[7] ^ r[5] ^ r[4] ^ r[3]};
    end
    s[255] = 0;
    adc = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    base = 200;
    for (int rd = 0; rd < NROUNDS; rd++) begin
      for (int k = 0; k < 3; k++) arr[k] = base + k * T + $urandom_range(0, 60);
      exp_ba[rd] = arr[1] - arr[0] - T;
      exp_cb[rd] = arr[2] - arr[1] - T;
      c_end[rd] = arr[2] + L * N - 1 + 1;   // chip index + one cycle of pulse detection
      for (int t = base - 200; t < base + 4 * T; t++) begin
        automatic bit on = 0;
        bit ph;
        for (int k = 0; k < 3; k++)
          if (t >= arr[k] && t < arr[k] + L * N && s[(t - arr[k]) / N]) on = 1;
        ph = on ? ($urandom_range(0, 99) < 50) : ($urandom_range(0, 99) < 1);
        adc = ph ? 12'd3000 : 12'd100;
        cyc = t;
        @(negedge clk);
      end
      base = base + 4 * T + 200;
    end
    adc = 0;
    repeat (1000) @(negedge clk);
    check(nres == NROUNDS, $sformatf("%0d results", nres));
    check(nframes == NROUNDS, $sformatf("%0d frames", nframes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
