// uvpos_pkg -- constants, pilot sequence and result types shared by the
// transmitter and receiver of the UV TDOA positioning system.
//
// Numbers that follow the published prototype: pilot length L = 256 symbols,
// symbol rate 1 Mbps, time-division slot T = 300 us, transmitter clock 10 MHz,
// receiver sampling 100 MHz.  Choices of this design: one chip is one 10 ns
// receiver sample, so a symbol has n = 100 chips; the pilot bits are the
// 255-bit m-sequence of the LFSR x^8+x^6+x^5+x^4+1 (seed 1) followed by a
// single 0, which gives 128 ones and 128 zeros and an aperiodic
// autocorrelation sidelobe of at most 17 against a peak of 256.
package uvpos_pkg;

  // ---- system numbers ---------------------------------------------------
  localparam int unsigned PILOT_MAX           = 256;  // longest pilot the function supplies
  localparam int unsigned PILOT_LEN           = 256;  // L
  localparam int unsigned TX_CLK_HZ           = 10_000_000;
  localparam int unsigned RX_CLK_HZ           = 100_000_000;
  localparam int unsigned SYMBOL_RATE_HZ      = 1_000_000;
  localparam int unsigned SLOT_US             = 300;  // T
  localparam int unsigned TX_TICKS_PER_SYMBOL = TX_CLK_HZ / SYMBOL_RATE_HZ;      // 10
  localparam int unsigned TX_SLOT_TICKS       = SLOT_US * (TX_CLK_HZ / 1_000_000); // 3000
  localparam int unsigned CHIPS_PER_SYMBOL    = RX_CLK_HZ / SYMBOL_RATE_HZ;      // n = 100
  localparam int unsigned RX_SLOT_CHIPS       = SLOT_US * (RX_CLK_HZ / 1_000_000); // 30000

  // ---- widths -----------------------------------------------------------
  localparam int unsigned TS_W   = 32;  // chip timestamp width (10 ns units)
  localparam int unsigned CORR_W = 24;  // signed correlation value width

  // ---- serial report format ---------------------------------------------
  localparam logic [7:0] REPORT_SYNC  = 8'hA5;
  localparam int unsigned REPORT_BYTES = 10;  // sync, 4 x t_BA, 4 x t_CB, checksum

  // ---- types ------------------------------------------------------------
  typedef enum logic [1:0] {SLOT_A = 2'd0, SLOT_B = 2'd1, SLOT_C = 2'd2} slot_e;

  // One detected pilot: chip index at which the pilot starts, and its
  // correlation value.
  typedef struct packed {
    logic        [TS_W-1:0]   start;
    logic signed [CORR_W-1:0] value;
  } peak_t;

  // Flying-time differences in chips: t_BA = t_B - t_A - T, t_CB = t_C - t_B - T.
  typedef struct packed {
    logic signed [31:0] t_ba;
    logic signed [31:0] t_cb;
  } tdoa_t;

  // Pilot bits s_1..s_L as bit 0..L-1.
  function automatic logic [PILOT_MAX-1:0] pilot_seq();
    logic [PILOT_MAX-1:0] s;
    logic [7:0] r;
    logic fb;
    s = '0;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      s[i] = r[0];
      fb   = r[7] ^ r[5] ^ r[4] ^ r[3];
      r    = {r[6:0], fb};
    end
    s[255] = 1'b0;
    return s;
  endfunction

endpackage
