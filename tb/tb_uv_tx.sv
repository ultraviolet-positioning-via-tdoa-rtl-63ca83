// tb_uv_tx -- checks the transmitter end to end: for each slot A, B, C the
// LED waveform after a PPS must be the 256-symbol pilot (regenerated here)
// at 10 ticks per symbol, beginning 3 + slot*3000 clock edges after the edge
// that first samples the PPS, with the LED dark everywhere else.
`timescale 1ns/1ps
module tb_uv_tx;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pps = 0;
  logic [1:0] slot;
  logic led_on, busy;
  logic [255:0] ref_s;
  longint unsigned cyc = 0;

  uv_tx dut (.clk_10m(clk), .rst_n, .pps, .tx_slot(slot), .led_on, .busy);

  always #50 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] r;
    longint unsigned e0;
    int errs, first_busy;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      ref_s[i] = r[0];
      r = {r[6:0], r[7] ^ r[5] ^ r[4] ^ r[3]};
    end
    ref_s[255] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sl = 0; sl < 3; sl++) begin
      slot = 2'(sl);
      @(posedge clk); #13 pps = 1;
      @(posedge clk); e0 = cyc;       // edge 0
      errs = 0; first_busy = -1;
      // after edge k (k = 1 ..), compare with expectation
      for (int k = 1; k <= 3 + sl * 3000 + 2560 + 50; k++) begin
        @(posedge clk); #1;
        if (k == 20) pps = 0;
        if (busy && first_busy < 0) first_busy = k;
        if (k >= 3 + sl * 3000 && k < 3 + sl * 3000 + 2560) begin
          if (led_on !== ref_s[(k - 3 - sl * 3000) / 10]) errs++;
        end else if (led_on) errs++;
      end
      check(errs == 0, $sformatf("slot %0d: %0d LED mismatches", sl, errs));
      check(first_busy == 3 + sl * 3000, $sformatf("slot %0d: pilot began after edge %0d", sl, first_busy));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
