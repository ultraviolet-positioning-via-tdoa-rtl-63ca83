// tb_tx_frame_construction -- checks the OOK pilot at 10 ticks per symbol:
// every tick of the 2560-tick pilot against a pilot regenerated here from
// its LFSR recurrence, the busy length, the idle-low LED and that a start
// while busy is ignored.
`timescale 1ns/1ps
module tb_tx_frame_construction;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic led_on, busy;
  logic [255:0] ref_s;

  tx_frame_construction dut (.clk_10m(clk), .rst_n, .start, .led_on, .busy);

  always #50 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] r;
    int busy_ticks, led_err;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      ref_s[i] = r[0];
      r = {r[6:0], r[7] ^ r[5] ^ r[4] ^ r[3]};
    end
    ref_s[255] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!busy && !led_on, "idle after reset");
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      busy_ticks = 0; led_err = 0;
      for (int t = 0; t < 2560; t++) begin
        if (t == 700) start = 1;             // ignored: busy
        if (t == 701) start = 0;
        if (led_on !== ref_s[t / 10]) led_err++;
        if (busy) busy_ticks++;
        @(negedge clk);
      end
      check(led_err == 0, $sformatf("pilot mismatches: %0d", led_err));
      check(busy_ticks == 2560, $sformatf("busy ticks %0d", busy_ticks));
      check(!busy && !led_on, "idle after pilot");
      repeat (40) begin @(negedge clk); check(!led_on, "led low while idle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
