// weight_update_unit: desired weight update dW = eta * delta * x.
//
// The product of the learning rate, the back-propagated error of the
// post-synaptic neuron and the activation of the pre-synaptic neuron is
// formed exactly and brought into the chi accumulator's fixed-point format by
// an arithmetic right shift. The shift is supplied per layer by the
// sequencer; it includes the error normalisation exponent, which is how the
// normalisation factor of the errors is folded into the learning rate.
// The result saturates to the chi width.
//
// Purely combinational. eta is unsigned (ETA_W bits), delta signed (DW bits),
// x unsigned (XW bits).
module weight_update_unit
  import mp_pkg::*;
#(
  parameter int unsigned DW = DH_W,
  parameter int unsigned XW = X_W,
  parameter int unsigned EW = ETA_W,
  parameter int unsigned CW = CHI_W
) (
  input  logic        [EW-1:0]      eta,
  input  logic signed [DW-1:0]      delta,
  input  logic        [XW-1:0]      x,
  input  logic        [SHIFT_W-1:0] shift,
  output logic signed [CW-1:0]      dw
);
  localparam int unsigned PRW = DW + XW + EW + 2;
  logic signed [PRW-1:0] prod;
  logic signed [PRW-1:0] shifted;
  localparam logic signed [PRW-1:0] MAXV = PRW'({1'b0, {(CW-1){1'b1}}});
  localparam logic signed [PRW-1:0] MINV = -MAXV - 1;

  always_comb begin
    prod    = PRW'(delta) * $signed({1'b0, eta}) * $signed({1'b0, x});
    shifted = prod >>> shift;
    if (shifted > MAXV)      dw = CW'(MAXV);
    else if (shifted < MINV) dw = CW'(MINV);
    else                     dw = CW'(shifted);
  end
endmodule
