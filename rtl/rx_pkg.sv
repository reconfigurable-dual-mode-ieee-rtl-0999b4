// Shared constants and helpers of the dual-mode IEEE 802.15.4 receiver.
//
// The chip table is the 2.4 GHz O-QPSK DSSS table of IEEE 802.15.4: symbol 0 is
// the 32-chip sequence below, symbols 1..7 are symbol 0 cyclically delayed by
// 4*k chips, and symbols 8..15 are symbols 0..7 with every odd-indexed chip
// inverted. The table comes from the standard; the receiver description only
// says that each symbol is spread to a 32-chip sequence. Bit i of a chip word
// is chip c_i, and c_0 is sent first.
//
// Contents: sizes, the mode type, pn_seq() for the chip table, popcount
// helpers and PRE_REF, the 256-chip preamble as seen in a shift window (bit 0
// newest). It holds no logic and no timing. A lint run on this package alone
// reports PRE_REF as unused; it is used by snr_indicator.
package rx_pkg;

  localparam int CHIPS_PER_SYM = 32;
  localparam int PRE_SYMS      = 8;                    // 32 zero bits of preamble
  localparam int PRE_CHIPS     = PRE_SYMS * CHIPS_PER_SYM;

  typedef logic [CHIPS_PER_SYM-1:0] chipword_t;

  // Active demodulator chain.
  typedef enum logic {MODE_QPSK = 1'b0, MODE_MSK = 1'b1} mode_t;

  // c_0 .. c_31 of symbol 0: 1101 1001 1100 0011 0101 0010 0010 1110
  localparam chipword_t PN0 = 32'b0111_0100_0100_1010_1100_0011_1001_1011;

  // Chip sequence of data symbol s (bit i = chip c_i).
  function automatic chipword_t pn_seq(input logic [3:0] s);
    chipword_t base, r;
    int sh;
    sh = 4 * int'(s[2:0]);
    base = PN0;
    // Delay by sh chips: chip i of the result is chip (i - sh) mod 32 of PN0.
    for (int i = 0; i < CHIPS_PER_SYM; i++)
      r[i] = base[(i - sh + CHIPS_PER_SYM) % CHIPS_PER_SYM];
    if (s[3])
      for (int i = 1; i < CHIPS_PER_SYM; i += 2) r[i] = ~r[i];
    return r;
  endfunction

  // Number of ones in a word of up to 256 bits.
  function automatic logic [8:0] popcount256(input logic [PRE_CHIPS-1:0] v);
    logic [8:0] n;
    n = '0;
    for (int i = 0; i < PRE_CHIPS; i++) n += 9'(v[i]);
    return n;
  endfunction

  function automatic logic [5:0] popcount32(input chipword_t v);
    logic [5:0] n;
    n = '0;
    for (int i = 0; i < CHIPS_PER_SYM; i++) n += 6'(v[i]);
    return n;
  endfunction

  // Reference preamble as it sits in a 256-chip shift register whose bit 0 is
  // the newest chip: bit j holds preamble chip (255 - j).
  function automatic logic [PRE_CHIPS-1:0] preamble_window();
    logic [PRE_CHIPS-1:0] w;
    for (int j = 0; j < PRE_CHIPS; j++)
      w[j] = PN0[(PRE_CHIPS - 1 - j) % CHIPS_PER_SYM];
    return w;
  endfunction

  localparam logic [PRE_CHIPS-1:0] PRE_REF = preamble_window();

endpackage
