// sdc_pkg: shared constants, types and helpers for the stochastic digital circuits.
//
// Energies (unnormalised natural-log probabilities) travel between blocks in a
// sign-magnitude fixed-point code of EM integer bits (the top one is the sign)
// and EN fraction bits, as in the printed examples 01011.001 = 11.125 and
// 10111.100 = -7.5 (m = 5, n = 3). The 8.4 split used by default is one of the
// precisions the accuracy study printed (4.2 ... 8.4); the 12-bit total also
// matches the "12-bit hardware" of the depth-perception results.
// Arithmetic inside blocks is done in two's complement; the helpers below
// convert, saturating at the largest magnitude the code can hold.
package sdc_pkg;

  localparam int unsigned EM = 8;          // integer bits, sign included
  localparam int unsigned EN = 4;          // fraction bits
  localparam int unsigned EW = EM + EN;    // bits of one energy word

  typedef logic [EW-1:0] energy_t;         // sign-magnitude energy word

  localparam int EMAXMAG = (1 << (EW - 1)) - 1;  // largest magnitude, in 2^-EN units

  // Integer value (in units of 2^-EN) -> sign-magnitude word, saturating.
  function automatic energy_t to_energy(int v);
    int mag;
    mag = (v < 0) ? -v : v;
    if (mag > EMAXMAG) mag = EMAXMAG;
    return {(v < 0) && (mag != 0), mag[EW-2:0]};
  endfunction

  // Sign-magnitude word -> integer value in units of 2^-EN.
  function automatic int from_energy(energy_t e);
    int mag;
    mag = int'(e[EW-2:0]);
    return e[EW-1] ? -mag : mag;
  endfunction

endpackage
