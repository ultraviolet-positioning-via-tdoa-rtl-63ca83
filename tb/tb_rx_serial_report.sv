// tb_rx_serial_report -- decodes the UART line with an independent 8N1
// receiver (sampling each bit at its centre) and checks every frame byte:
// sync 0xA5, t_BA and t_CB most significant byte first, the byte sum; also
// the frame duration of 10 x (10 bit times + 1 cycle) and that a result offered while a
// frame is being sent is dropped and flagged.  Runs at 16 clocks per bit.
`timescale 1ns/1ps
module tb_rx_serial_report;
  import uvpos_pkg::*;
  localparam int CPB = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic res_valid, txd, busy, dropped;
  tdoa_t res;
  logic [7:0] got [$];
  int ndropped = 0;
  longint unsigned cyc = 0;

  rx_serial_report #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .res_valid, .res, .uart_txd(txd), .busy, .dropped);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && dropped) ndropped++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // 8N1 receiver
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      if (txd == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = txd;
        end
        repeat (CPB) @(posedge clk);
        if (txd == 1'b1) got.push_back(b);
        else $display("framing error");
      end
    end
  end

  task automatic one_frame(input logic signed [31:0] ba, input logic signed [31:0] cb, input bit extra);
    logic [7:0] expv [10];
    logic [7:0] sum;
    longint unsigned t0, t1;
    got.delete();
    expv[0] = 8'hA5;
    for (int i = 0; i < 4; i++) begin
      expv[1 + i] = ba[31 - 8 * i -: 8];
      expv[5 + i] = cb[31 - 8 * i -: 8];
    end
    sum = 0;
    for (int i = 1; i < 9; i++) sum += expv[i];
    expv[9] = sum;
    @(negedge clk);
    res_valid = 1; res.t_ba = ba; res.t_cb = cb;
    @(negedge clk);
    res_valid = 0;
    t0 = cyc;
    if (extra) begin
      repeat (300) @(negedge clk);
      res_valid = 1; res.t_ba = 32'sd7; res.t_cb = 32'sd7;
      @(negedge clk);
      res_valid = 0;
    end
    while (busy) @(negedge clk);
    t1 = cyc;
    repeat (3 * CPB) @(negedge clk);
    check(got.size() == 10, $sformatf("%0d bytes", got.size()));
    for (int i = 0; i < 10 && i < got.size(); i++)
      check(got[i] == expv[i], $sformatf("byte %0d: %h exp %h", i, got[i], expv[i]));
    check(t1 - t0 >= 10 * (10 * CPB + 1) - 2 && t1 - t0 <= 10 * (10 * CPB + 1) + 2, $sformatf("frame took %0d cycles", t1 - t0));
  endtask

  initial begin
    res_valid = 0; res = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    check(txd == 1'b1 && !busy, "idle line high");
    one_frame(32'sd42, -32'sd17, 0);
    one_frame(-32'sd123456, 32'sd7654321, 1);
    for (int k = 0; k < 5; k++) one_frame($signed($urandom), $signed($urandom), 0);
    check(ndropped == 1, $sformatf("%0d dropped", ndropped));
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
