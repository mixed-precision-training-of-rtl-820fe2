// sigmoid_unit: neuron activation x = f(z) and its derivative f'(z).
//
// The hidden and output neurons of the trained network are sigmoids. The
// weighted sum z arrives from the ADC as a signed Q4.4 code. f is the
// piecewise-linear PLAN approximation of the logistic function (this design's
// choice; the paper evaluates an exact sigmoid):
//   |z| >= 5          : 1
//   2.375 <= |z| < 5  : |z|/32 + 0.84375
//   1 <= |z| < 2.375  : |z|/8  + 0.625
//   |z| < 1           : |z|/4  + 0.5
//   f(-z) = 1 - f(z)
// The result is an unsigned Q0.8 code, truncated and clipped to 255, which is also the DAC
// code for the next layer. f'(z) = f(z)(1 - f(z)) in Q0.8 is what the
// backward pass needs, computed from the clipped activation.
//
// Purely combinational.
module sigmoid_unit
  import mp_pkg::*;
(
  input  logic signed [ADC_W-1:0] z,   // Q4.4
  output logic        [X_W-1:0]   x,   // Q0.8
  output logic        [FP_W-1:0]  fp   // Q0.8
);
  logic [ADC_W:0] mag;      // |z| in Q4.4, up to 128
  logic [11:0]    pos;      // f(|z|) in Q0.8, up to 256
  logic [11:0]    val;
  logic [X_W-1:0] xc;
  logic [2*X_W:0] prodv;

  always_comb begin
    mag = z[ADC_W-1] ? (ADC_W+1)'(-z) : (ADC_W+1)'(z);
    // Q4.4 magnitude m: |z| = m/16; f in Q0.8 = 256*f.
    if (mag >= 9'd80)      pos = 12'd256;
    else if (mag >= 9'd38) pos = 12'(mag >> 1) + 12'd216;   // 256*(m/512) + 216
    else if (mag >= 9'd16) pos = 12'(mag << 1) + 12'd160;   // 256*(m/128) + 160
    else                   pos = 12'(mag << 2) + 12'd128;   // 256*(m/64)  + 128
    val = z[ADC_W-1] ? (12'd256 - pos) : pos;
    xc  = (val > 12'd255) ? 8'd255 : val[X_W-1:0];
    x   = xc;
    prodv = (2*X_W+1)'(xc) * (2*X_W+1)'(9'd256 - 9'(xc));
    fp  = FP_W'(prodv >> X_FRAC);
  end
endmodule
