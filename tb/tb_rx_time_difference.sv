// tb_rx_time_difference -- feeds peak reports straight into the
// time-difference unit: complete rounds with random arrival offsets (also
// across the 32-bit wrap of the chip counter), a round missing its C peak
// (must be dropped), a fourth peak inside a round (must be ignored), and
// checks t_BA = t_B - t_A - T and t_CB = t_C - t_B - T for every round.
`timescale 1ns/1ps
module tb_rx_time_difference;
  import uvpos_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic peak_valid;
  peak_t peak;
  logic res_valid, round_dropped, extra_peak;
  tdoa_t res;
  int nres = 0, ndrop = 0, nextra = 0;
  int exp_ba, exp_cb;

  rx_time_difference dut (.clk, .rst_n, .peak_valid, .peak, .res_valid, .res, .round_dropped, .extra_peak);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      nres++;
      check(res.t_ba == exp_ba && res.t_cb == exp_cb,
            $sformatf("result %0d,%0d exp %0d,%0d", res.t_ba, res.t_cb, exp_ba, exp_cb));
    end
    if (round_dropped) ndrop++;
    if (extra_peak) nextra++;
  end

  task automatic send(input logic [31:0] st);
    @(negedge clk);
    peak_valid = 1; peak.start = st; peak.value = 24'sd500;
    @(negedge clk);
    peak_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    logic [31:0] base;
    int da, db, dc;
    peak_valid = 0; peak = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    base = 32'd1000;
    for (int r = 0; r < 20; r++) begin
      da = $urandom_range(0, 200); db = $urandom_range(0, 200); dc = $urandom_range(0, 200);
      if (r == 10) base = 32'hFFFF_0000;       // crosses the counter wrap
      exp_ba = (db - da); exp_cb = (dc - db);
      send(base + 32'(da));
      send(base + 32'(30000 + db));
      if (r == 5) begin
        base = base + 32'd1_000_000;           // C missing: next A opens a new round
        continue;
      end
      send(base + 32'(60000 + dc));
      if (r == 7) send(base + 32'(75000));     // stray fourth peak
      base = base + 32'd1_000_000;
    end
    repeat (5) @(negedge clk);
    check(nres == 19, $sformatf("%0d results", nres));
    check(ndrop == 1, $sformatf("%0d dropped rounds", ndrop));
    check(nextra == 1, $sformatf("%0d extra peaks", nextra));
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
