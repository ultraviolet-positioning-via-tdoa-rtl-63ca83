// rx_sync -- pilot synchronisation: correlation and arg-max peak search.
//
// The receiver finds the arrival of each transmitter's pilot as the start
// chip that maximises the correlation C(t) with the known pilot (maximum
// correlation peak criterion).  rx_correlator supplies C(t) for every start
// chip t, one per chip.  Because the three pilots arrive one slot apart, this
// block takes the arg-max locally: once C reaches corr_thresh it watches
// SEARCH_WIN more chips (default 2n, two symbols, which covers the rising and
// falling flank of the correlation triangle), reports the start chip with
// the largest C (the first one on ties) and then ignores BLANK_LEN chips
// (default L*n, the rest of that pilot) before it looks for the next
// crossing.  The windowed search, the run-time threshold and the window
// lengths are this design's choices; the correlation itself follows the
// published synchroniser.
//
// Interface: chip_valid/chip_count from the pulse counter; peak_valid is a
// one-cycle strobe with peak = {start chip index, C}.  corr_valid, corr and
// corr_start expose the correlator output for observation.
//
// Timing: peak_valid comes SEARCH_WIN chips plus two cycles after the chip
// whose correlation first reached the threshold.
module rx_sync
  import uvpos_pkg::*;
#(
  parameter int unsigned L          = PILOT_LEN,
  parameter int unsigned N          = CHIPS_PER_SYMBOL,
  parameter int unsigned CNT_W      = 1,
  parameter int unsigned SEARCH_WIN = 2 * N,
  parameter int unsigned BLANK_LEN  = L * N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     chip_valid,
  input  logic [CNT_W-1:0]         chip_count,
  input  logic signed [CORR_W-1:0] corr_thresh,
  output logic                     peak_valid,
  output peak_t                    peak,
  output logic                     corr_valid,
  output logic signed [CORR_W-1:0] corr,
  output logic [TS_W-1:0]          corr_start
);

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_BLANK} state_e;

  localparam int unsigned WIN_W = $clog2((SEARCH_WIN > BLANK_LEN ? SEARCH_WIN : BLANK_LEN) + 1);

  state_e     state;
  logic [WIN_W-1:0] cnt;
  peak_t      best;

  rx_correlator #(.L(L), .N(N), .CNT_W(CNT_W)) u_corr (
    .clk, .rst_n, .chip_valid, .chip_count, .corr_valid, .corr, .corr_start
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      best       <= '0;
      peak_valid <= 1'b0;
      peak       <= '0;
    end else begin
      peak_valid <= 1'b0;
      if (corr_valid) begin
        unique case (state)
          S_IDLE: if (corr >= corr_thresh) begin
            state      <= S_SEARCH;
            best.start <= corr_start;
            best.value <= corr;
            cnt        <= '0;
          end
          S_SEARCH: begin
            peak_t nb;
            nb = best;
            if (corr > best.value) begin
              nb.start = corr_start;
              nb.value = corr;
            end
            best <= nb;
            if (cnt == WIN_W'(SEARCH_WIN - 1)) begin
              peak_valid <= 1'b1;
              peak       <= nb;
              state      <= S_BLANK;
              cnt        <= '0;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          S_BLANK: begin
            if (cnt == WIN_W'(BLANK_LEN - 1)) begin
              state <= S_IDLE;
              cnt   <= '0;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  initial begin
    assert (SEARCH_WIN >= 1 && BLANK_LEN >= 1) else $fatal(1, "window lengths must be positive");
  end

endmodule
