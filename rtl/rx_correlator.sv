// rx_correlator -- sliding pilot correlator of the receiver.
//
// For every candidate start chip t the synchroniser needs
//     C(t) = sum_{i=1..L} (2 s_i - 1) * u_i(t),
//     u_i(t) = sum_{j=0..n-1} N_{t + n(i-1) + j},
// the pulse count of each pilot symbol, weighted +1 for a 1 and -1 for a 0.
// Evaluating it directly costs L*n additions per chip.  This block instead
// keeps C in a register and updates it once per chip: when the window
// advances by one chip, only the L+1 chips at the symbol boundaries change
// the symbol they belong to.  With the window held in a delay line x (x[0]
// the newest chip, positions q_k = L*n - n*k for k = 0..L, c_j = 2 s_{j+1} - 1
// and c_{-1} = c_L = 0),
//     C_new = C + sum_{k=0..L} (c_{k-1} - c_k) * x_new[q_k],
// so each chip costs one sum of L+1 small terms with weights in {-2..2}.  The
// delay line is L*n+1 chips long and cleared by reset, which makes the
// register equal to the direct sum from the first chip on.
//
// The correlation formula is the one of the published receiver; the
// incremental form and the delay line are this design's implementation.
//
// Timing: for each chip_valid, corr_valid is high one cycle later with
// corr = C(corr_start), where corr_start = (index of the chip just taken)
// - (L*n - 1), i.e. the chip index at which a pilot ending with that chip
// would have started.  Chip indices count chip_valid strobes from 0 after
// reset, modulo 2^TS_W.
module rx_correlator
  import uvpos_pkg::*;
#(
  parameter int unsigned L     = PILOT_LEN,
  parameter int unsigned N     = CHIPS_PER_SYMBOL,
  parameter int unsigned CNT_W = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     chip_valid,
  input  logic [CNT_W-1:0]         chip_count,
  output logic                     corr_valid,
  output logic signed [CORR_W-1:0] corr,
  output logic [TS_W-1:0]          corr_start
);

  localparam logic [PILOT_MAX-1:0] SEQ = pilot_seq();
  localparam int unsigned LN = L * N;

  // c_j = 2 s_{j+1} - 1 for j = 0..L-1, and 0 outside
  function automatic int c_of(int j);
    if (j < 0 || j >= int'(L)) return 0;
    return SEQ[j] ? 1 : -1;
  endfunction

  logic [(LN+1)*CNT_W-1:0]   line;   // x[p] at bits [p*CNT_W +: CNT_W]
  logic signed [CORR_W-1:0]  delta;
  logic [TS_W-1:0]           chip_idx;

  initial begin
    assert (L >= 2 && L <= PILOT_MAX && N >= 1) else $fatal(1, "bad correlator size");
  end

  // Increment of C for the window that includes chip_count as its newest chip.
  always_comb begin
    delta = '0;
    for (int k = 0; k <= int'(L); k++) begin
      logic [CNT_W-1:0] tap;
      if (k == int'(L)) tap = chip_count;
      else              tap = line[(int'(LN) - int'(N) * k - 1) * int'(CNT_W) +: CNT_W];
      delta = delta + CORR_W'(c_of(k - 1) - c_of(k)) * $signed({1'b0, tap});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line       <= '0;
      corr       <= '0;
      corr_valid <= 1'b0;
      corr_start <= '0;
      chip_idx   <= '0;
    end else begin
      corr_valid <= chip_valid;
      if (chip_valid) begin
        line       <= {line[LN*CNT_W-1:0], chip_count};
        corr       <= corr + delta;
        corr_start <= chip_idx - TS_W'(LN - 1);
        chip_idx   <= chip_idx + 1'b1;
      end
    end
  end

endmodule
