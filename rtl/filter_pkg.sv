// filter_pkg: word widths, fixed-point formats and quantised coefficients shared
// by the studio-noise notch filter.
//
// Two second-order IIR notch sections are cascaded. The first removes the wall
// resonance at 315 Hz, the second the coincidence dip at 2500 Hz, both for a
// 7.4 kHz sample rate. Each section computes
//     y[n] = x[n] + a1*x[n-1] + x[n-2] - b1*y[n-1] - b2*y[n-2]
// with a0 = a2 = 1, so only three products are needed per section.
//
// Number formats:
//   * samples are 8-bit two's-complement integers (SAMPLE_W);
//   * coefficients are held as integers scaled by 2^15 (COEF_FRAC): one integer
//     bit and 15 fraction bits of magnitude, with the sign carried separately by
//     the integer, exactly the quantised values listed for the design;
//   * the accumulator word is 16 bits (ACC_W) with ACC_FRAC = 6 fraction bits,
//     so it spans +/-512 sample steps, four times the 8-bit input range. The
//     number of fraction bits is this implementation's choice.
// The coefficient values, sample width, coefficient format and adder width
// follow the published design; ACC_FRAC, rounding and saturation are choices
// made here.
package filter_pkg;

  localparam int unsigned SAMPLE_W  = 8;   // bits per audio sample
  localparam int unsigned ACC_W     = 16;  // adder / product word
  localparam int unsigned COEF_FRAC = 15;  // coefficient fraction bits
  localparam int unsigned ACC_FRAC  = 6;   // accumulator fraction bits (chosen here)

  // Quantised coefficients, value = integer / 2^15.
  // Section 1, 315 Hz wall resonance notch.
  localparam int A1_315  = -63206;  // -1.92889404296875
  localparam int B1_315  = -62574;  // -1.90960693359375
  localparam int B2_315  =  32115;  //  0.980072021484375
  // Section 2, 2500 Hz coincidence notch.
  localparam int A1_2500 =  34361;  //  1.04861450195312
  localparam int B1_2500 =  34017;  //  1.03811645507812
  localparam int B2_2500 =  32115;  //  0.980072021484375

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [ACC_W-1:0]    acc_t;

endpackage
