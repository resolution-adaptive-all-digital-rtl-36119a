// ra_pkg: sizes, widths and helper functions shared by the resolution-adaptive
// finite-alphabet equalizer.
//
// Number formats used throughout:
//  * ADC code m (Q_MAX-bit two's complement, sign-extended from q bits) stands
//    for the midrise level z = Delta*(m + 1/2). The design works in half-steps,
//    z~ = 2m+1, so every level is an odd integer.
//  * Equalizer code n (K_MAX-bit two's complement, sign-extended from k bits)
//    stands for the finite-alphabet entry x~ = 2n+1 in half-steps of the
//    FL-MMSE step size.
//  * Inner products x_u^H z are kept exactly as integers in units of the two
//    half-steps (IP_W bits).
//  * Channel-estimate entries h~ are in ADC half-steps with H_FRAC fractional
//    bits, so that their resolution does not fall with the ADC resolution.
//  * A post-equalization scaling factor is a complex mantissa (MU_W bits per
//    part) with a right-shift exponent (EXP_W bits); estimates leave the
//    equalizer with OUT_FRAC fractional bits.
// Array sizes (256 antennas, up to 64 UEs, q up to 8 bits, k up to 6 bits) and
// the 10-bit scaling factor follow the paper; all widths derived here are this
// design's own choice.
package ra_pkg;

  parameter int unsigned B_ANT    = 256;  // BS antennas B
  parameter int unsigned U_MAX    = 64;   // largest UE load supported
  parameter int unsigned Q_MAX    = 8;    // largest ADC resolution q
  parameter int unsigned K_MAX    = 6;    // largest FL-MMSE resolution k
  parameter int unsigned N_PPAC   = Q_MAX; // time-interleaved PPAC instances
  parameter int unsigned SAMPLE_W = 16;   // fixed-point stand-in for the analog input
  parameter int unsigned W_W      = 12;   // L-MMSE matrix entries
  parameter int unsigned H_W      = 12;   // channel-estimate entries (ADC half-steps)
  parameter int unsigned H_FRAC   = 4;    // fractional bits of channel-estimate entries
  parameter int unsigned MU_W     = 10;   // scaling-factor mantissa
  parameter int unsigned EXP_W    = 6;    // scaling-factor exponent
  parameter int unsigned IP_W     = 26;   // exact inner product x^H z
  parameter int unsigned OUT_W    = 16;   // equalized estimate
  parameter int unsigned OUT_FRAC = 8;    // fractional bits of the estimate

  // Reset operating point: the worst case the paper reports (U=64, 16-QAM),
  // which needs q=7 and k=6 with all antennas active.
  parameter int unsigned RESET_Q = 7;
  parameter int unsigned RESET_K = 6;

  // Weight of bit j of a two's complement number of 'bits' bits; bits above
  // the sign position are disabled (weight 0).
  function automatic int plane_weight(input int unsigned j, input int unsigned bits);
    if (j + 1 < bits)       return 1 << j;
    else if (j + 1 == bits) return -(1 << j);
    else                    return 0;
  endfunction

endpackage
