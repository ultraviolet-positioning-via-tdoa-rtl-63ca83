// rx_serial_report -- sends each pair of time differences to the PC.
//
// The receiver FPGA hands t_BA and t_CB to a PC over a serial port; the PC
// solves the hyperbola equations for the position.  Each result becomes a
// 10-byte frame: sync byte 0xA5, t_BA as four bytes (most significant
// first), t_CB as four bytes, and the 8-bit sum of those eight bytes.  The
// bytes go out through uart_tx (8N1, CLKS_PER_BIT cycles per bit, 115200
// baud at 100 MHz by default).  Frame layout, baud rate and the dropping of a
// result that arrives while a frame is still being sent (dropped strobe) are
// this design's choices; the published system states only that the
// differences are sent over a serial port.
//
// Timing: the frame is latched at the clock edge that samples res_valid and
// the start bit of the sync byte begins at the next edge; each byte takes 10
// bit times plus one idle cycle, so a frame takes 10 * (10 * CLKS_PER_BIT + 1)
// cycles (0.87 ms at 115200 baud), during which busy is high.
module rx_serial_report
  import uvpos_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  res_valid,
  input  tdoa_t res,
  output logic  uart_txd,
  output logic  busy,
  output logic  dropped
);

  logic [7:0] frame [REPORT_BYTES];
  logic [3:0] idx;
  logic       u_valid, u_ready;
  logic       sending;     // frame bytes still to hand to the UART
  logic [7:0] sum;

  always_comb begin
    sum = res.t_ba[31:24] + res.t_ba[23:16] + res.t_ba[15:8] + res.t_ba[7:0]
        + res.t_cb[31:24] + res.t_cb[23:16] + res.t_cb[15:8] + res.t_cb[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending <= 1'b0;
      idx     <= '0;
      dropped <= 1'b0;
      for (int i = 0; i < int'(REPORT_BYTES); i++) frame[i] <= '0;
    end else begin
      dropped <= res_valid && busy;
      if (!busy) begin
        if (res_valid) begin
          frame[0] <= REPORT_SYNC;
          frame[1] <= res.t_ba[31:24];
          frame[2] <= res.t_ba[23:16];
          frame[3] <= res.t_ba[15:8];
          frame[4] <= res.t_ba[7:0];
          frame[5] <= res.t_cb[31:24];
          frame[6] <= res.t_cb[23:16];
          frame[7] <= res.t_cb[15:8];
          frame[8] <= res.t_cb[7:0];
          frame[9] <= sum;
          idx      <= '0;
          sending  <= 1'b1;
        end
      end else if (u_valid && u_ready) begin
        if (idx == 4'(REPORT_BYTES - 1)) begin
          sending <= 1'b0;
          idx     <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  assign u_valid = sending;
  assign busy    = sending | ~u_ready;   // until the stop bit of the last byte

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .valid(u_valid), .data(frame[idx]), .ready(u_ready), .txd(uart_txd)
  );

endmodule
