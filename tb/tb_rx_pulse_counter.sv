// tb_rx_pulse_counter -- random ADC samples against a reference model of
// rising-threshold-crossing detection, for one sample per chip (the default)
// and for four samples per chip.
`timescale 1ns/1ps
module tb_rx_pulse_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [11:0] adc, thr;
  logic cv1, cv4;
  logic [0:0] cnt1;
  logic [2:0] cnt4;

  rx_pulse_counter dut1 (.clk, .rst_n, .adc_data(adc), .adc_thresh(thr), .chip_valid(cv1), .chip_count(cnt1));
  rx_pulse_counter #(.SAMPLES_PER_CHIP(4)) dut4 (.clk, .rst_n, .adc_data(adc), .adc_thresh(thr), .chip_valid(cv4), .chip_count(cnt4));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit prev_hi, hi, xing;
    int acc, ph, exp4, pulses;
    thr = 12'd1000; adc = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    prev_hi = 1; acc = 0; ph = 0; pulses = 0;
    for (int t = 0; t < 4000; t++) begin
      // PMT-like samples: mostly low, sometimes a pulse of 1..3 samples
      adc = ($urandom_range(0, 99) < 30) ? 12'($urandom_range(1000, 4095)) : 12'($urandom_range(0, 999));
      if (t == 100) thr = 12'd2000;
      hi = (adc >= thr);
      xing = hi && !prev_hi;
      prev_hi = hi;
      @(posedge clk); #1;
      check(cv1 == 1'b1, "chip_valid every sample");
      check(cnt1 == 1'(xing), $sformatf("t=%0d count %0d exp %0d", t, cnt1, xing));
      pulses += int'(xing);
      acc += int'(xing);
      if (ph == 3) begin
        check(cv4 == 1'b1 && int'(cnt4) == acc, $sformatf("4-sample chip count %0d exp %0d", cnt4, acc));
        acc = 0; ph = 0;
      end else begin
        check(cv4 == 1'b0, "4-sample chip_valid only every 4th");
        ph++;
      end
      @(negedge clk);
    end
    check(pulses > 500, "enough pulses seen");
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
