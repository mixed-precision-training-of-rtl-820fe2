// adc_model: behavioural model of the column analog-to-digital converter.
//
// Behavioural model, not synthesizable circuitry in a real chip: the ADC is
// an analog/mixed-signal part. The bit-line (or word-line) current reaches
// it here as an exact integer sum of conductance x input-code products. The
// converter has OW bits of resolution (8, the resolution the paper finds
// sufficient) and a programmable range: the input is divided by 2^shift,
// rounded to nearest and clipped to the signed OW-bit code range. The range
// is set per operation by the sequencer (the paper chose ADC ranges from the
// observed distribution of the weighted sums; the fixed ranges used here are
// this design's choice). `sat` flags a clipped conversion.
//
// Combinational; the crossbar model registers its result.
module adc_model
  import mp_pkg::*;
#(
  parameter int unsigned IW = 40,
  parameter int unsigned OW = ADC_W
) (
  input  logic signed [IW-1:0]      sum,
  input  logic        [SHIFT_W-1:0] shift,
  output logic signed [OW-1:0]      code,
  output logic                      sat
);
  logic signed [IW:0] r;
  logic signed [IW:0] half;
  localparam logic signed [IW:0] MAXC = (IW+1)'((1 << (OW - 1)) - 1);
  localparam logic signed [IW:0] MINC = -MAXC - 1;

  always_comb begin
    half = (shift == '0) ? '0 : ((IW+1)'(1) <<< (shift - SHIFT_W'(1)));
    r    = ((IW+1)'(sum) + half) >>> shift;
    sat  = 1'b0;
    if (r > MAXC) begin
      code = OW'(MAXC);
      sat  = 1'b1;
    end else if (r < MINC) begin
      code = OW'(MINC);
      sat  = 1'b1;
    end else begin
      code = OW'(r);
    end
  end
endmodule
