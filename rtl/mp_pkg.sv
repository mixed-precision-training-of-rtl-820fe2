// mp_pkg: number formats and constants shared by the mixed-precision trainer.
//
// All arithmetic is two's-complement fixed point. The formats are this
// design's own choice; the paper works in floating point and gives only the
// 8-bit converter resolution and the weight range [-1, 1].
//
//   activation x      X_W  bits, unsigned, value = code / 2^X_FRAC   (DAC code, Q0.8)
//   error delta (DAC) D_W  bits, signed,   value = code / 2^D_FRAC   (Q1.7)
//   ADC output        ADC_W bits, signed, format chosen by the ADC range shift
//   conductance W     G_W  bits, signed,   value = code / 2^G_FRAC   (Q2.14)
//   accumulator chi   CHI_W bits, signed,  value = code / 2^CHI_FRAC (Q8.16)
//   pulse count p     P_W  bits, signed, saturated at +-P_MAX
package mp_pkg;
  // Network of the evaluated MNIST classifier: 784 inputs + bias, 250 hidden
  // sigmoid neurons + bias, 10 sigmoid outputs.
  localparam int unsigned N_IN     = 784;
  localparam int unsigned N_HID    = 250;
  localparam int unsigned N_OUT    = 10;

  localparam int unsigned X_W      = 8;
  localparam int unsigned X_FRAC   = 8;
  localparam int unsigned D_W      = 8;
  localparam int unsigned D_FRAC   = 7;
  localparam int unsigned ADC_W    = 8;
  localparam int unsigned FP_W     = 8;   // f'(z) = x(1-x), Q0.8, at most 64
  localparam int unsigned G_W      = 16;
  localparam int unsigned G_FRAC   = 14;
  localparam int unsigned CHI_W    = 24;
  localparam int unsigned CHI_FRAC = 16;
  localparam int unsigned P_W      = 5;
  localparam int unsigned P_MAX    = 15;
  localparam int unsigned ETA_W    = 8;   // learning rate eta = code / 2^ETA_FRAC
  localparam int unsigned ETA_FRAC = 12;
  localparam int unsigned DH_W     = 16;  // hidden-layer delta, signed
  localparam int unsigned SHIFT_W  = 6;

  // ADC ranges: forward sums are read as Q4.4 (sigmoid input range +-8),
  // backward sums as Q3.5. The shift is the number of fraction bits of the
  // bit-line sum dropped by the ADC.
  localparam int unsigned ADC_FWD_FRAC = 4;
  localparam int unsigned ADC_BWD_FRAC = 5;
  localparam int unsigned ADC_FWD_SHIFT = G_FRAC + X_FRAC - ADC_FWD_FRAC;  // 18
  localparam int unsigned ADC_BWD_SHIFT = G_FRAC + D_FRAC - ADC_BWD_FRAC;  // 16

  // Hidden delta = backward ADC code (Q3.5) * f' (Q0.8): 13 fraction bits.
  localparam int unsigned DH_FRAC = ADC_BWD_FRAC + FP_W;

  // Output-layer normalisation: the raw output delta e*f' has 16 fraction bits;
  // the DAC code is delta >>> (NORM_MAX - s), s in [0, NORM_MAX].
  localparam int unsigned NORM_MAX = 2 * X_FRAC - D_FRAC;  // 9

  // Right shifts that bring eta*delta*x into chi format, before adding the
  // normalisation shift s of the current image.
  localparam int unsigned UPD2_SHIFT = ETA_FRAC + D_FRAC  + X_FRAC - CHI_FRAC;  // 11
  localparam int unsigned UPD1_SHIFT = ETA_FRAC + DH_FRAC + X_FRAC - CHI_FRAC;  // 17

  // Update granularity of an n-bit device: eps = 2 / (2^n - 2).
  function automatic logic [CHI_W-1:0] eps_chi(input int unsigned nbits);
    return CHI_W'((64'd2 << CHI_FRAC) / ((64'd1 << nbits) - 64'd2));
  endfunction
  function automatic logic [G_W-1:0] eps_g(input int unsigned nbits);
    return G_W'((64'd2 << G_FRAC) / ((64'd1 << nbits) - 64'd2));
  endfunction
endpackage
