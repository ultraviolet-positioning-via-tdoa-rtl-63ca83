// tb_uart_rx -- behavioural 8N1 serial receiver standing in for the PC's
// serial port in the testbenches.  It waits for a falling start edge,
// samples every bit at its centre (CPB clocks per bit) and pulses
// byte_valid with the byte if the stop bit is high; framing_error pulses
// otherwise.
module tb_uart_rx #(
  parameter int CPB = 868
) (
  input  logic       clk,
  input  logic       rxd,
  output logic       byte_valid,
  output logic [7:0] data,
  output logic       framing_error
);
  initial begin
    byte_valid = 0; framing_error = 0; data = 0;
    forever begin
      logic [7:0] b;
      @(negedge rxd);
      repeat (CPB / 2) @(posedge clk);
      if (rxd == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = rxd;
        end
        repeat (CPB) @(posedge clk);
        data = b;
        if (rxd == 1'b1) byte_valid = 1; else framing_error = 1;
        @(posedge clk);
        byte_valid = 0; framing_error = 0;
      end
    end
  end
endmodule
