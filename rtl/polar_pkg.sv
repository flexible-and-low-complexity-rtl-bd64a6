// polar_pkg: constants and helper functions shared by the flexible polar
// encoder and the flexible decoder front end.
//
// Code lengths are carried as log2 values (log_n), which is how the hardware
// selects stage outputs and memory limits. The default sizes follow the main
// configurations of the design: an encoder with n_max = 16384 and P = 32 bits
// per cycle, and a decoder with n_max = 32768 and P = 256. The LLR width is
// this design's own choice (6 bits); no width is fixed by the architecture.
package polar_pkg;

  // Encoder defaults.
  localparam int unsigned ENC_NMAX = 16384;
  localparam int unsigned ENC_P    = 32;

  // Decoder defaults.
  localparam int unsigned DEC_NMAX = 32768;
  localparam int unsigned DEC_P    = 256;
  localparam int unsigned LLR_W    = 6;

  // Bit-reversal of the low `m` bits of `i` (used only for building masks
  // in parity-bit-reversed mode and in testbenches).
  function automatic int unsigned bit_reverse(int unsigned i, int unsigned m);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < m; b++)
      if (((i >> b) & 1) != 0) r |= (1 << (m - 1 - b));
    return r;
  endfunction

endpackage
