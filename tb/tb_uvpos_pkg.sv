// tb_uvpos_pkg -- checks the shared constants and the pilot sequence.
// The pilot is checked against its linear recurrence
// a[k] = a[k-8] ^ a[k-6] ^ a[k-5] ^ a[k-4], its first byte, its balance
// (128 ones), the appended zero and its aperiodic autocorrelation sidelobes.
module tb_uvpos_pkg;
  import uvpos_pkg::*;
  int checks = 0, failures = 0;
  logic [PILOT_MAX-1:0] s;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int ones, side, worst;
    s = pilot_seq();
    check(TX_TICKS_PER_SYMBOL == 10, "10 ticks per symbol");
    check(TX_SLOT_TICKS == 3000, "T = 3000 ticks");
    check(CHIPS_PER_SYMBOL == 100, "n = 100");
    check(RX_SLOT_CHIPS == 30000, "T = 30000 chips");
    check(PILOT_LEN == 256, "L = 256");
    check(s[7:0] == 8'b0111_0001, $sformatf("first 8 bits %b", s[7:0]));
    for (int k = 8; k < 255; k++)
      check(s[k] == (s[k-8] ^ s[k-6] ^ s[k-5] ^ s[k-4]), $sformatf("recurrence at %0d", k));
    check(s[255] == 1'b0, "appended zero");
    ones = 0;
    for (int k = 0; k < 256; k++) ones += s[k];
    check(ones == 128, $sformatf("ones = %0d", ones));
    worst = 0;
    for (int d = 1; d < 256; d++) begin
      side = 0;
      for (int k = 0; k + d < 256; k++) side += (s[k] == s[k+d]) ? 1 : -1;
      if (side < 0) side = -side;
      if (side > worst) worst = side;
    end
    check(worst <= 17, $sformatf("sidelobe %0d", worst));
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
