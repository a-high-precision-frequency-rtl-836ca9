// apfft_pkg: widths and small helpers shared by the APFFT frequency-locking core.
//
// The core estimates, for a reference and a device-under-test (DUT) signal sampled by the
// same ADC clock, the phase at the centre of each (2N-1)-sample segment with an all-phase
// FFT, and turns the change of the REF-DUT phase difference into a frequency error that a
// PID loop drives to zero.  The numbers below are the ones the whole datapath agrees on.
// ADC_W (16 bit) and N = 2048 come from the prototype; the phase and error formats are
// this design's own choices:
//   * phases are unsigned PHASE_W-bit fractions of a turn (2^PHASE_W = one turn), so a
//     difference of two phases wraps modulo one turn by ordinary two's-complement overflow;
//   * the frequency error is a signed FERR_W-bit number of turns with PHASE_W fraction bits,
//     i.e. (delta_phi_n - delta_phi_(n-1) + C_n) / (2*pi) = (f_ref - f_dut) * Tp.
package apfft_pkg;

  localparam int ADC_W   = 16;  // ADC resolution (ADS5263-class, 16 bit)
  localparam int PHASE_W = 32;  // phase word, 2^32 = one turn
  localparam int WRAP_W  = 16;  // integer-turn part of the frequency error (wrap counter)
  localparam int FERR_W  = WRAP_W + PHASE_W;  // frequency-error word (signed turns per Tp)

  typedef logic [PHASE_W-1:0]        phase_t;
  typedef logic signed [FERR_W-1:0]  ferr_t;

  // Bit reversal of the low `bits` bits of v (bits <= 16).
  function automatic logic [15:0] bit_rev(input logic [15:0] v, input int bits);
    logic [15:0] r;
    r = '0;
    for (int i = 0; i < 16; i++)
      if (i < bits) r[i] = v[bits-1-i];
    return r;
  endfunction

endpackage
