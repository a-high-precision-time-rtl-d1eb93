// dfpf_pkg: constants shared by the DFPF (digital frequency-domain phase
// fitting) time-measurement datapath.
//
// The record length (512 samples) and the 40 MHz processing clock follow the
// prototype described for this design.  The fixed-point formats are this
// design's own choice, because only "truncated fixed-point arithmetic" is
// specified:
//   * spectrum words from the FFT core: 26-bit signed, unscaled (16-bit ADC
//     samples + log2(512) + 1 growth bits);
//   * cross-correlation words to the CORDIC core: 40-bit signed, the top 40
//     bits of the exact 53-bit product sum (13 LSBs truncated);
//   * phase from the CORDIC core: 16-bit signed radians with 13 fractional
//     bits (range +-4 rad), magnitude 41-bit unsigned in the same units as
//     the cross-correlation words;
//   * unwrapped phase: 24-bit signed with the same 13 fractional bits;
//   * slope: 32-bit signed radians per bin with 13+16 = 29 fractional bits;
//   * delay tau: 32-bit signed, in sample periods with 16 fractional bits.
package dfpf_pkg;

  localparam int unsigned N_SAMPLES = 512;  // points per record and FFT size
  localparam int unsigned ADC_W     = 16;   // ADC sample width
  localparam int unsigned SPEC_W    = 26;   // FFT output width (unscaled)
  localparam int unsigned CC_W      = 40;   // cross-correlation word to CORDIC
  localparam int unsigned AMP_W     = 41;   // CORDIC magnitude width
  localparam int unsigned PH_W      = 16;   // CORDIC phase width
  localparam int unsigned PH_F      = 13;   // fractional bits of phase
  localparam int unsigned UPH_W     = 24;   // unwrapped phase width
  localparam int unsigned SLOPE_QF  = 16;   // extra fractional bits of slope
  localparam int unsigned SLOPE_W   = 32;   // slope width
  localparam int unsigned TAU_W     = 32;   // delay width
  localparam int unsigned TAU_F     = 16;   // fractional bits of delay

  // Stage latencies of the external cores in the prototype at 40 MHz:
  // FFT 4.350 us = 174 cycles, CORDIC 0.325 us = 13 cycles, divider
  // 3.050 us = 122 cycles, whole record 20.675 us = 827 cycles.
  localparam int unsigned FFT_LAT_PAPER    = 174;
  localparam int unsigned CORDIC_LAT_PAPER = 13;
  localparam int unsigned DIV_LAT_PAPER    = 122;
  localparam int unsigned TOTAL_LAT_PAPER  = 827;

  localparam real PI = 3.14159265358979323846;

  // Phase constants in a format with f fractional bits.
  function automatic longint phase_pi(input int unsigned f);
    return longint'($rtoi(PI * real'(longint'(1) << f) + 0.5));
  endfunction

  // Scale from slope (rad/bin) to delay (sample periods): N / (2*pi),
  // returned with 16 fractional bits.
  function automatic longint tau_scale(input int unsigned n);
    return longint'($rtoi(real'(n) / (2.0 * PI) * 65536.0 + 0.5));
  endfunction

endpackage
