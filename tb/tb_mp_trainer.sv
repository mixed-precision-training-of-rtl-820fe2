// tb_mp_trainer: end-to-end test of the trainer on a reduced network
// (NI inputs, NH hidden, NO outputs). A bit-accurate reference model of the
// whole training step (forward pass through both arrays and the ADC, PLAN
// sigmoid, output error and normalisation, transposed product, eta*delta*x,
// chi accumulation, p = trunc(chi/eps) and the linear device response) runs
// beside the design; after every image the outputs, the prediction, the
// normalisation exponent and the update and pulse counts are compared.
// Training images alternate with inference-only images, whose latency is
// checked. The mechanisms of the design are counted and each must occur:
// a device update, potentiation and depression, a stall of the update
// stream, a saturated pulse count, a clipped ADC conversion, a normalisation
// exponent that changes from image to image, inference mode and device clipping.
module tb_mp_trainer;
  import mp_pkg::*;
  parameter int NI = 12;
  parameter int NH = 6;
  parameter int NO = 4;
  parameter int IMAGES = 24;
  localparam int D1 = (NI + 1) * NH, D2 = (NH + 1) * NO;
  localparam int A1W = $clog2(D1), LW = $clog2(NO), PXW = $clog2(NI);
  localparam logic [G_W-1:0] GEP = eps_g(4), GED = eps_g(3);

  logic clk = 0, rst_n = 0;
  logic pix_we = 0;
  logic [PXW-1:0] pix_addr = 0;
  logic [X_W-1:0] pix_data = 0;
  logic [LW-1:0] label = 0;
  logic start = 0, train = 0, clear_chi = 0;
  logic [ETA_W-1:0] eta = 0;
  logic [CHI_W-1:0] eps_p = 0, eps_d = 0;
  logic busy, done;
  logic [LW-1:0] pred;
  logic [X_W-1:0] out_x [NO];
  logic [SHIFT_W-1:0] norm_s;
  logic init_we = 0, init_layer = 0;
  logic [A1W-1:0] init_addr = 0;
  logic signed [G_W-1:0] init_val = 0;
  logic [31:0] n_dev_updates, n_pulses, n_stalls, n_pulse_sat, n_adc_sat;

  mp_trainer #(.NI(NI), .NH(NH), .NO(NO), .DEV_EPS_P(GEP), .DEV_EPS_D(GED)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;

  // ---------------------------------------------------------------- model
  int g1 [D1], g2 [D2];
  longint c1 [D1], c2 [D2];
  int m_upd = 0, m_pulses = 0, m_psat = 0, m_adcsat = 0, m_pot = 0, m_dep = 0, m_clip = 0;
  int x0 [NI + 1], x1 [NH + 1], f1 [NH], x2 [NO], f2 [NO], dac [NO], dh [NH];
  int m_s, m_pred;

  function automatic int adc(input longint s, input int sh);
    longint r;
    r = (s + (64'sd1 <<< (sh - 1))) >>> sh;
    if (r > 127 || r < -128) m_adcsat++;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int sig(input int code);
    real a, f;
    int p;
    a = real'(code < 0 ? -code : code) / 16.0;
    if (a >= 5.0)        f = 1.0;
    else if (a >= 2.375) f = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   f = 0.125 * a + 0.625;
    else                 f = 0.25 * a + 0.5;
    p = int'($floor(f * 256.0 + 0.0001));
    if (code < 0) p = 256 - p;
    return (p > 255) ? 255 : p;
  endfunction

  function automatic void device(inout int g, input int p);
    for (int n = 0; n < (p < 0 ? -p : p); n++) begin
      g += (p > 0) ? int'(GEP) : -int'(GED);
      if (g > (1 << G_FRAC))  begin g = 1 << G_FRAC;    m_clip++; end
      if (g < -(1 << G_FRAC)) begin g = -(1 << G_FRAC); m_clip++; end
    end
    m_pulses += (p < 0 ? -p : p);
    if (p > 0) m_pot++;
    if (p < 0) m_dep++;
  endfunction

  function automatic int quant(inout longint c, input longint dw);
    longint mx, e, q;
    mx = (64'sd1 <<< (CHI_W - 1)) - 1;
    c = c + dw;
    if (c > mx) c = mx;
    if (c < -mx - 1) c = -mx - 1;
    e = (c >= 0) ? longint'(eps_p) : longint'(eps_d);
    q = (c >= 0 ? c : -c) / e;
    if (q > P_MAX) begin q = P_MAX; m_psat++; end
    if (c < 0) q = -q;
    c = c - q * e;
    if (q != 0) m_upd++;
    return int'(q);
  endfunction

  function automatic longint dwf(input int d, input int xv, input int sh);
    longint r, mx;
    r = (longint'(eta) * longint'(d) * longint'(xv)) >>> sh;
    mx = (64'sd1 <<< (CHI_W - 1)) - 1;
    if (r > mx) r = mx;
    if (r < -mx - 1) r = -mx - 1;
    return r;
  endfunction

  function automatic void model_step(input int lab, input bit tr);
    int mx, best;
    for (int j = 0; j < NH; j++) begin
      longint s = 0;
      for (int i = 0; i <= NI; i++) s += longint'(g1[j * (NI + 1) + i]) * x0[i];
      x1[j] = sig(adc(s, ADC_FWD_SHIFT));
      f1[j] = (x1[j] * (256 - x1[j])) >> 8;
    end
    x1[NH] = 255;
    for (int k = 0; k < NO; k++) begin
      longint s = 0;
      for (int j = 0; j <= NH; j++) s += longint'(g2[k * (NH + 1) + j]) * x1[j];
      x2[k] = sig(adc(s, ADC_FWD_SHIFT));
      f2[k] = (x2[k] * (256 - x2[k])) >> 8;
    end
    best = 0;
    for (int k = 1; k < NO; k++) if (x2[k] > x2[best]) best = k;
    m_pred = best;
    mx = 0;
    for (int k = 0; k < NO; k++) begin
      int dl;
      dl = ((k == lab) ? 256 : 0) - x2[k];
      dl = dl * f2[k];
      dac[k] = dl;
      if ((dl < 0 ? -dl : dl) > mx) mx = (dl < 0 ? -dl : dl);
    end
    m_s = 0;
    for (int s = 0; s <= int'(NORM_MAX); s++) if ((mx >> (NORM_MAX - s)) <= 127) m_s = s;
    for (int k = 0; k < NO; k++) dac[k] = dac[k] >>> (NORM_MAX - m_s);
    if (!tr) return;
    for (int j = 0; j < NH; j++) begin
      longint s = 0;
      for (int k = 0; k < NO; k++) s += longint'(g2[k * (NH + 1) + j]) * dac[k];
      dh[j] = adc(s, ADC_BWD_SHIFT) * f1[j];
    end
    for (int k = 0; k < NO; k++)
      for (int j = 0; j <= NH; j++) begin
        int a = k * (NH + 1) + j;
        device(g2[a], quant(c2[a], dwf(dac[k], x1[j], UPD2_SHIFT + m_s)));
      end
    for (int j = 0; j < NH; j++)
      for (int i = 0; i <= NI; i++) begin
        int a = j * (NI + 1) + i;
        device(g1[a], quant(c1[a], dwf(dh[j], x0[i], UPD1_SHIFT + m_s)));
      end
  endfunction

  // ---------------------------------------------------------------- stimulus
  task automatic run_image(input bit tr, input int lab, input int bright);
    int t0, lat;
    for (int i = 0; i < NI; i++) begin
      x0[i] = (bright < 0) ? 255 : int'($urandom_range(0, bright));
      @(negedge clk);
      pix_we = 1; pix_addr = PXW'(i); pix_data = X_W'(x0[i]);
    end
    x0[NI] = 255;
    @(negedge clk);
    pix_we = 0;
    label = LW'(lab); train = tr;
    while (busy) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cycles;
    while (!done) @(negedge clk);
    lat = cycles - t0;
    model_step(lab, tr);
    checks++;
    if (int'(pred) != m_pred || int'(norm_s) != m_s) begin
      failures++; $display("FAIL pred=%0d exp %0d s=%0d exp %0d", pred, m_pred, norm_s, m_s);
    end
    for (int k = 0; k < NO; k++) begin
      checks++;
      if (int'(out_x[k]) != x2[k]) begin
        failures++; $display("FAIL out_x[%0d]=%0d exp %0d", k, out_x[k], x2[k]);
      end
    end
    if (!tr) begin
      checks++;
      if (lat != NH + NO + 4) begin
        failures++; $display("FAIL inference latency %0d, exp %0d", lat, NH + NO + 4);
      end
    end
  endtask

  int n_infer = 0, n_s_lo = 0, n_s_hi = 0;

  initial begin
    int r;
    bit tr;
    repeat (2) @(negedge clk);
    rst_n = 1;
    eta = 8'd200;
    eps_p = eps_chi(4); eps_d = eps_chi(3);
    while (busy) @(negedge clk);
    // initial conductances in {-1, 0, +1}; hidden neuron 0 gets all +1 so
    // that a bright image clips its ADC
    for (int a = 0; a < D1; a++) begin
      r = int'($urandom_range(0, 3));
      g1[a] = (r == 0 || a <= NI) ? (1 << G_FRAC) : (r == 1) ? -(1 << G_FRAC) : 0;
      c1[a] = 0;
      @(negedge clk); init_we = 1; init_layer = 0; init_addr = A1W'(a); init_val = G_W'(g1[a]);
    end
    for (int a = 0; a < D2; a++) begin
      r = int'($urandom_range(0, 3));
      g2[a] = (r == 0) ? (1 << G_FRAC) : (r == 1) ? -(1 << G_FRAC) : 0;
      c2[a] = 0;
      @(negedge clk); init_we = 1; init_layer = 1; init_addr = A1W'(a); init_val = G_W'(g2[a]);
    end
    @(negedge clk); init_we = 0;
    for (int n = 0; n < IMAGES; n++) begin
      tr = (n % 4 != 3);
      if (n == IMAGES - 4) begin eps_p = 24'd40; eps_d = 24'd40; end   // tiny eps: many pulses
      run_image(tr, int'($urandom_range(0, NO - 1)), (n == 0) ? -1 : (n % 2) ? 255 : 60);
      if (!tr) n_infer++;
      if (n == 0) n_s_lo = m_s;
      if (m_s != n_s_lo) n_s_hi++;
      checks++;
      if (int'(n_dev_updates) != m_upd || int'(n_pulses) != m_pulses ||
          int'(n_pulse_sat) != m_psat || int'(n_adc_sat) != m_adcsat) begin
        failures++;
        $display("FAIL image %0d: updates %0d/%0d pulses %0d/%0d psat %0d/%0d adcsat %0d/%0d", n,
                 n_dev_updates, m_upd, n_pulses, m_pulses, n_pulse_sat, m_psat, n_adc_sat, m_adcsat);
      end
    end
    $display("mechanisms: updates=%0d pot=%0d dep=%0d pulses=%0d stalls=%0d pulse_sat=%0d adc_sat=%0d s_first=%0d s_changes=%0d infer=%0d clip=%0d",
             m_upd, m_pot, m_dep, m_pulses, n_stalls, m_psat, m_adcsat, n_s_lo, n_s_hi, n_infer, m_clip);
    if (m_upd == 0)    begin failures++; $display("FAIL no device update"); end
    if (m_pot == 0)    begin failures++; $display("FAIL no potentiation"); end
    if (m_dep == 0)    begin failures++; $display("FAIL no depression"); end
    if (n_stalls == 0) begin failures++; $display("FAIL no stall"); end
    if (m_psat == 0)   begin failures++; $display("FAIL no pulse-count saturation"); end
    if (m_adcsat == 0) begin failures++; $display("FAIL no ADC clipping"); end
    if (n_s_hi == 0) begin failures++; $display("FAIL normalisation exponent never changed"); end
    if (n_infer == 0)  begin failures++; $display("FAIL no inference run"); end
    if (m_clip == 0)   begin failures++; $display("FAIL no device clipping"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
