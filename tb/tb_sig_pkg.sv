// Testbench helpers: an IEEE 802.15.4 transmitter and channel model.
//
// The chip table below is typed in from the IEEE 802.15.4 2.4 GHz O-QPSK
// table (c_0 first) and is kept apart from the receiver's own table, so the
// testbenches check the receiver against an independent copy. msk_wave()
// produces the complex baseband of the frame as continuous-phase MSK (phase
// +pi/2 over a chip of value 1, -pi/2 over a 0), which is the same signal as
// half-sine O-QPSK of the differentially encoded chips, and adds a carrier
// frequency offset, a phase offset, a timing offset and white Gaussian noise.
package tb_sig_pkg;

  localparam string PN_STR [16] = '{
    "11011001110000110101001000101110", "11101101100111000011010100100010",
    "00101110110110011100001101010010", "00100010111011011001110000110101",
    "01010010001011101101100111000011", "00110101001000101110110110011100",
    "11000011010100100010111011011001", "10011100001101010010001011101101",
    "10001100100101100000011101111011", "10111000110010010110000001110111",
    "01111011100011001001011000000111", "01110111101110001100100101100000",
    "00000111011110111000110010010110", "01100000011101111011100011001001",
    "10010110000001110111101110001100", "11001001011000000111011110111000"};

  localparam real PI = 3.14159265358979;

  function automatic bit pn_chip(int s, int i);
    return PN_STR[s & 15][i] == "1";
  endfunction

  // Chips of a frame: 8 zero symbols of preamble, then the given symbols.
  function automatic void frame_chips(input int syms[$], output bit chips[$]);
    chips = {};
    for (int p = 0; p < 8; p++)
      for (int i = 0; i < 32; i++) chips.push_back(pn_chip(0, i));
    foreach (syms[j])
      for (int i = 0; i < 32; i++) chips.push_back(pn_chip(syms[j], i));
  endfunction

  function automatic real urand01();
    return (real'($urandom_range(1000000, 1)) ) / 1000001.0;
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(urand01())) * $cos(2.0 * PI * urand01());
  endfunction

  function automatic int clip8(real v);
    int r;
    r = $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
    if (r > 127) r = 127;
    if (r < -127) r = -127;
    return r;
  endfunction

  // spc samples per chip. fd: carrier offset in cycles per sample. frac:
  // timing offset in samples (0..1). lead and tail: samples of noise alone
  // before and after the frame.
  function automatic void msk_wave(input bit chips[$], input int spc, input real amp,
                                   input real fd, input real theta, input real sigma,
                                   input real frac, input int lead, input int tail,
                                   output int si[$], output int sq[$]);
    real ph, t, cum;
    int  k, kc, n, nchips;
    si = {}; sq = {};
    nchips = chips.size();
    for (n = 0; n < lead; n++) begin
      si.push_back(clip8(sigma * gauss())); sq.push_back(clip8(sigma * gauss()));
    end
    cum = 0.0;   // sum of +-1 over the chips before kc
    kc  = 0;
    for (n = 0; n < nchips * spc; n++) begin
      t = (real'(n) + frac) / real'(spc);      // time in chips
      k = $rtoi(t);
      if (k >= nchips) k = nchips - 1;
      while (kc < k) begin cum += chips[kc] ? 1.0 : -1.0; kc++; end
      ph = (PI / 2.0) * (cum + (t - real'(k)) * (chips[k] ? 1.0 : -1.0));
      ph += theta + 2.0 * PI * fd * real'(n + lead);
      si.push_back(clip8(amp * $cos(ph) + sigma * gauss()));
      sq.push_back(clip8(amp * $sin(ph) + sigma * gauss()));
    end
    for (n = 0; n < tail; n++) begin
      si.push_back(clip8(sigma * gauss())); sq.push_back(clip8(sigma * gauss()));
    end
  endfunction

endpackage
