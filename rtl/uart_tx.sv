// uart_tx -- byte-wide asynchronous serial transmitter, 8N1.
//
// A byte offered with valid while ready is high is sent LSB first between a
// low start bit and a high stop bit, each bit CLKS_PER_BIT clock cycles long
// (868 cycles of 100 MHz gives 115200 baud).  The line idles high.
//
// Timing: ready falls in the cycle after the byte is taken, the start bit
// begins in that same cycle, and ready returns 10 bit times later; a byte
// offered back to back is taken in that cycle, so consecutive bytes are
// 10 * CLKS_PER_BIT + 1 cycles apart.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);

  localparam int unsigned DIV_W = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]       shreg;   // stop, data[7:0], start
  logic [3:0]       bits_left;
  logic [DIV_W-1:0] div;

  assign ready = (bits_left == 4'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      div       <= '0;
      txd       <= 1'b1;
    end else if (ready) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data, 1'b0};
        bits_left <= 4'd10;
        div       <= '0;
        txd       <= 1'b0;
      end
    end else begin
      txd <= shreg[0];
      if (div == DIV_W'(CLKS_PER_BIT - 1)) begin
        div       <= '0;
        shreg     <= {1'b1, shreg[9:1]};
        bits_left <= bits_left - 1'b1;
        txd       <= shreg[1];
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  // the line is idle (high) whenever no byte is being sent
  assert property (@(posedge clk) disable iff (!rst_n) (ready && !valid) |=> txd)
    else $error("uart_tx: line not idle");

endmodule
