// crossbar_array: behavioural model of the computational memory unit, a
// crossbar of resistive devices that stores one layer's weights as
// conductances and multiplies with them in place.
//
// Behavioural model: the array, its DACs and its ADC are analog parts. The
// model keeps one signed conductance per cross-point (Q2.14, range [-1, 1]),
// indexed col * N_ROW + row, the same linear synapse address the digital
// unit uses. Word line `row` carries pre-synaptic neuron i, bit line `col`
// post-synaptic neuron j.
//
//  * Forward (rd_dir = 0): DAC codes x[i] drive the word lines; bit line
//    rd_idx collects I_j = sum_i W_ji x_i.
//  * Backward (rd_dir = 1, only if BACKWARD): DAC codes d[j] drive the bit
//    lines; word line rd_idx collects sum_j W_ji d_j (transposed product).
//  The line sum is formed on the clock edge after rd_en and goes through
//  adc_model with the range shift given with rd_en; rd_code is valid in the
//  cycle after rd_en. The physical array forms all line sums at once; this
//  model reads out one line per request through a shared ADC (this design's
//  choice). With READ_SIGMA > 0 every device used in a product carries fresh
//  zero-mean, roughly Gaussian read noise of that standard deviation
//  (in Q2.14 LSBs).
//  * Programming: each rising edge of `pulse` changes device pulse_addr.
//    With BETA = 0 the device is linear: +EPS_P (pulse_pot = 1) or -EPS_D.
//    With BETA > 0 the step follows the exponential state-dependent model
//      dW_P = a exp(-BETA (W - Wmin)/(Wmax - Wmin)),
//      dW_D = a exp(-BETA (Wmax - W)/(Wmax - Wmin)),
//    with a = 2 (e^BETA - 1) / (BETA * STEPS), which makes STEPS pulses
//    span the range [-1, 1] for every BETA (continuous approximation, this
//    design's derivation of the paper's equal-step-count condition). With
//    PROG_SIGMA > 0 each step gets additive, roughly Gaussian noise of that
//    standard deviation (Q2.14 LSBs). The result is clipped to [-1, 1].
//    Noise is drawn from the sum of four uniform variates. The non-ideal
//    options are for simulation only; with all of them off the model is
//    plain integer logic.
//  * init_we writes a conductance directly (to set the initial weights).
//  The phase-change-memory device fit and differential device pairs are not
//  modelled.
module crossbar_array
  import mp_pkg::*;
#(
  parameter int unsigned N_ROW    = N_HID + 1,
  parameter int unsigned N_COL    = N_OUT,
  parameter bit          BACKWARD = 1'b1,
  parameter logic [G_W-1:0] EPS_P = eps_g(4),
  parameter logic [G_W-1:0] EPS_D = eps_g(4),
  parameter real         BETA       = 0.0,
  parameter int unsigned STEPS      = 14,
  parameter int unsigned PROG_SIGMA = 0,
  parameter int unsigned READ_SIGMA = 0,
  localparam int unsigned AW      = $clog2(N_ROW * N_COL),
  localparam int unsigned IW      = $clog2(N_ROW > N_COL ? N_ROW : N_COL),
  localparam int unsigned SW      = G_W + X_W + 2 + $clog2(N_ROW > N_COL ? N_ROW : N_COL)
) (
  input  logic                      clk,
  // word-line and bit-line DAC codes
  input  logic        [X_W-1:0]     x [N_ROW],
  input  logic signed [D_W-1:0]     d [N_COL],
  // read-out
  input  logic                      rd_en,
  input  logic                      rd_dir,
  input  logic        [IW-1:0]      rd_idx,
  input  logic        [SHIFT_W-1:0] adc_shift,
  output logic                      rd_valid,
  output logic signed [ADC_W-1:0]   rd_code,
  output logic                      rd_sat,
  // programming pulses
  input  logic                      pulse,
  input  logic                      pulse_pot,
  input  logic        [AW-1:0]      pulse_addr,
  // direct initialisation
  input  logic                      init_we,
  input  logic        [AW-1:0]      init_addr,
  input  logic signed [G_W-1:0]     init_val
);
  localparam logic signed [G_W:0] G_ONE = (G_W+1)'(1 << G_FRAC);
  localparam bit IDEAL = (BETA == 0.0) && (PROG_SIGMA == 0) && (READ_SIGMA == 0);

  logic signed [G_W-1:0]   g [N_ROW * N_COL];
  logic signed [SW-1:0]    acc;
  logic [SHIFT_W-1:0]      shift_q;
  logic                    pulse_q = 1'b0;

  // Linear device: one fixed step per pulse, clipped to [-1, 1].
  function automatic logic signed [G_W:0] lin_step(input logic signed [G_W-1:0] gv, input logic pot);
    int nv;
    nv = pot ? int'(gv) + int'(EPS_P) : int'(gv) - int'(EPS_D);
    if (nv > int'(G_ONE))  nv = int'(G_ONE);
    if (nv < -int'(G_ONE)) nv = -int'(G_ONE);
    return (G_W+1)'(nv);
  endfunction

  adc_model #(.IW(SW)) u_adc (.sum(acc), .shift(shift_q), .code(rd_code), .sat(rd_sat));

  // The ideal linear device is plain integer logic. Any non-ideality uses
  // real arithmetic and random numbers, which only a simulator evaluates,
  // so it lives in a branch of its own that is elaborated only when used.
  if (IDEAL) begin : g_ideal
    always_ff @(posedge clk) begin
      rd_valid <= rd_en;
      pulse_q  <= pulse;
      if (rd_en) begin
        logic signed [SW-1:0] a;
        a = '0;
        shift_q <= adc_shift;
        if (rd_dir && BACKWARD) begin
          for (int j = 0; j < N_COL; j++)
            a += SW'(g[j * N_ROW + int'(rd_idx)]) * SW'(d[j]);
        end else begin
          for (int i = 0; i < N_ROW; i++)
            a += SW'(g[int'(rd_idx) * N_ROW + i]) * $signed({1'b0, x[i]});
        end
        acc <= a;
      end
      if (init_we)
        g[init_addr] <= init_val;
      else if (pulse && !pulse_q)
        g[pulse_addr] <= G_W'(lin_step(g[pulse_addr], pulse_pot));
    end
  end else begin : g_device
    localparam real ONE_R = real'(1 << G_FRAC);
    localparam real ALPHA = (BETA == 0.0) ? 0.0 : 2.0 * ($exp(BETA) - 1.0) / (BETA * real'(STEPS));

    // Zero-mean noise with standard deviation sigma: the sum of four uniform
    // variates on [0, 1) has mean 2 and standard deviation 1/sqrt(3).
    function automatic int noise(input int unsigned sigma);
      real u;
      u = 0.0;
      for (int n = 0; n < 4; n++) u += real'($urandom) / 4294967296.0;
      return $rtoi((u - 2.0) * 1.7320508 * real'(sigma) + ((u >= 2.0) ? 0.5 : -0.5));
    endfunction

    // Conductance after one pulse.
    function automatic logic signed [G_W:0] step(input logic signed [G_W-1:0] gv, input logic pot);
      int  nv;
      real w, dw;
      if (BETA == 0.0) begin
        nv = pot ? int'(gv) + int'(EPS_P) : int'(gv) - int'(EPS_D);
      end else begin
        w  = real'(gv) / ONE_R;
        dw = pot ? ALPHA * $exp(-BETA * (w + 1.0) / 2.0) : ALPHA * $exp(-BETA * (1.0 - w) / 2.0);
        nv = int'(gv) + (pot ? $rtoi(dw * ONE_R + 0.5) : -$rtoi(dw * ONE_R + 0.5));
      end
      if (PROG_SIGMA != 0) nv += noise(PROG_SIGMA);
      if (nv > int'(G_ONE))  nv = int'(G_ONE);
      if (nv < -int'(G_ONE)) nv = -int'(G_ONE);
      return (G_W+1)'(nv);
    endfunction

    always_ff @(posedge clk) begin
      rd_valid <= rd_en;
      pulse_q  <= pulse;
      if (rd_en) begin
        logic signed [SW-1:0] a;
        a = '0;
        shift_q <= adc_shift;
        if (rd_dir && BACKWARD) begin
          for (int j = 0; j < N_COL; j++)
            a += (SW'(g[j * N_ROW + int'(rd_idx)]) + ((READ_SIGMA != 0) ? SW'(noise(READ_SIGMA)) : SW'(0)))
                 * SW'(d[j]);
        end else begin
          for (int i = 0; i < N_ROW; i++)
            a += (SW'(g[int'(rd_idx) * N_ROW + i]) + ((READ_SIGMA != 0) ? SW'(noise(READ_SIGMA)) : SW'(0)))
                 * $signed({1'b0, x[i]});
        end
        acc <= a;
      end
      if (init_we)
        g[init_addr] <= init_val;
      else if (pulse && !pulse_q)
        g[pulse_addr] <= G_W'(step(g[pulse_addr], pulse_pot));
    end
  end
endmodule
