// error_unit: output-layer error and its normalisation for the DAC.
//
// For the quadratic objective the output error of neuron k is
//   delta_k = (t_k - x_k) * f'(z_k),
// with the one-hot target t of the image's label (t_k = 1.0 for k == label).
// delta_k has 16 fraction bits. Before the errors are applied to the bit
// lines of the crossbar they are normalised so that the largest fits the
// signed D_W-bit DAC: the unit picks the largest s in [0, NORM_MAX] for which
// every delta_k >>> (NORM_MAX - s) fits, and outputs those codes with s. A
// DAC code therefore stands for delta * 2^s; the weight-update shift adds s
// back, which scales the learning rate by the normalisation factor. The
// power-of-two factor is this design's choice.
//
// Purely combinational over the whole output vector.
module error_unit
  import mp_pkg::*;
#(
  parameter int unsigned N = N_OUT
) (
  input  logic [X_W-1:0]            x     [N],   // output activations, Q0.8
  input  logic [FP_W-1:0]           fp    [N],   // f' of the output neurons, Q0.8
  input  logic [$clog2(N)-1:0]      label,       // class of the image
  output logic signed [D_W-1:0]     d_dac [N],   // normalised errors, DAC codes
  output logic [SHIFT_W-1:0]        norm_s,      // normalisation exponent s
  output logic signed [17:0]        delta [N]    // raw errors, 16 fraction bits
);
  logic signed [9:0]  e;
  logic        [17:0] mag;
  logic        [17:0] mmax;

  always_comb begin
    mmax = '0;
    for (int k = 0; k < N; k++) begin
      e        = (k == int'(label) ? 10'sd256 : 10'sd0) - $signed({2'b0, x[k]});
      delta[k] = 18'(e) * $signed({10'b0, fp[k]});
      mag      = delta[k][17] ? 18'(-delta[k]) : 18'(delta[k]);
      if (mag > mmax) mmax = mag;
    end
    norm_s = '0;
    for (int s = 0; s <= NORM_MAX; s++)
      if ((mmax >> (NORM_MAX - s)) <= 18'd127) norm_s = SHIFT_W'(s);
    for (int k = 0; k < N; k++)
      d_dac[k] = D_W'(delta[k] >>> (NORM_MAX - norm_s));
  end
endmodule
