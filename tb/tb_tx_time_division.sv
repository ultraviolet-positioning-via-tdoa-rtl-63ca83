// tb_tx_time_division -- checks the slot offsets of the time-division
// scheduler at the prototype's T = 3000 ticks: frame_start must come exactly
// 2 + slot*T clock edges after the edge that first samples the PPS high, once
// per PPS, and a PPS arriving while waiting restarts the schedule.
`timescale 1ns/1ps
module tb_tx_time_division;
  import uvpos_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pps = 0;
  logic [1:0] slot;
  logic frame_start, pps_seen;
  longint unsigned cyc = 0;

  tx_time_division dut (.clk_10m(clk), .rst_n, .pps, .tx_slot(slot), .frame_start, .pps_seen);

  always #50 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // raise PPS a little after a clock edge; return the cycle number of the edge that samples it
  task automatic pulse_pps(output longint unsigned e0);
    @(posedge clk); #13 pps = 1;
    @(posedge clk); e0 = cyc;
    repeat (20) @(posedge clk);
    #13 pps = 0;
  endtask

  task automatic run_slot(input int sl);
    longint unsigned e0, seen_at;
    int starts;
    slot = 2'(sl);
    starts = 0; seen_at = 0;
    fork
      pulse_pps(e0);
      begin
        repeat (3 * 3000 + 100) begin
          @(posedge clk);
          if (frame_start) begin starts++; seen_at = cyc; end
        end
      end
    join
    check(starts == 1, $sformatf("slot %0d: %0d frame starts", sl, starts));
    // frame_start is sampled high at the edge after it was set: 2 + slot*T + 1
    check(seen_at - e0 == longint'(3 + sl * 3000), $sformatf("slot %0d: latency %0d", sl, seen_at - e0));
  endtask

  initial begin
    longint unsigned e0, e1, seen_at;
    int starts;
    slot = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sl = 0; sl < 3; sl++) run_slot(sl);
    // restart: second PPS 1000 ticks after the first, slot C
    slot = 2;
    starts = 0; seen_at = 0;
    fork
      begin pulse_pps(e0); repeat (970) @(posedge clk); pulse_pps(e1); end
      begin
        repeat (9000) begin
          @(posedge clk);
          if (frame_start) begin starts++; seen_at = cyc; end
        end
      end
    join
    check(starts == 1, $sformatf("restart: %0d frame starts", starts));
    check(seen_at - e1 == 6003, $sformatf("restart: latency %0d from second PPS", seen_at - e1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
