// pulse_quantizer: turns an accumulated weight update chi into a number of
// device programming pulses p and the residual left in the accumulator.
//
// As in the mixed-precision scheme, p is chi / eps rounded toward zero, and
// p * eps is subtracted from chi. Potentiation and depression use separate
// granularities: eps_p when chi >= 0 and eps_d when chi < 0, so an asymmetric
// device can be served. |p| is saturated at P_MAX (this design's choice; the
// part of chi that was not turned into pulses stays in the residual). A zero
// granularity disables updates in that direction.
//
// Purely combinational; one quantisation per cycle.
module pulse_quantizer
  import mp_pkg::*;
#(
  parameter int unsigned CW   = CHI_W,
  parameter int unsigned PW   = P_W,
  parameter int unsigned PMAX = P_MAX
) (
  input  logic signed [CW-1:0] chi,      // accumulated update
  input  logic        [CW-1:0] eps_p,    // potentiation granularity, chi units
  input  logic        [CW-1:0] eps_d,    // depression granularity, chi units
  output logic signed [PW-1:0] p,        // signed pulse count
  output logic signed [CW-1:0] chi_res,  // chi - p*eps
  output logic                 sat       // |chi/eps| exceeded PMAX
);
  logic              neg;
  logic [CW-1:0]     mag;
  logic [CW-1:0]     eps;
  logic [CW-1:0]     q;
  logic [CW-1:0]     qs;
  logic [2*CW-1:0]   taken;

  always_comb begin
    neg   = chi[CW-1];
    mag   = neg ? CW'(-chi) : CW'(chi);
    eps   = neg ? eps_d : eps_p;
    q     = (eps == '0) ? '0 : mag / eps;
    sat   = (q > CW'(PMAX));
    qs    = sat ? CW'(PMAX) : q;
    taken = qs * eps;
    p       = neg ? -PW'(qs) : PW'(qs);
    chi_res = neg ? (chi + $signed(taken[CW-1:0])) : (chi - $signed(taken[CW-1:0]));
  end
endmodule
