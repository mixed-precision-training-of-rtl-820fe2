// tb_crossbar_array: loads random conductances into a small array, then
// checks forward (bit-line) and transposed (word-line) products through the
// ADC against an integer reference, the one-cycle read-out latency, and the
// device response to programming pulses (+EPS_P, -EPS_D, clipping at +-1,
// one step per pulse however long it is held). Two more instances check the
// non-linear device (BETA = 2: each step against the exponential model, and
// STEPS pulses span the range) and the noise options (mean and standard
// deviation of noisy programming steps and of noisy reads).
module tb_crossbar_array;
  import mp_pkg::*;
  localparam int NR = 6, NC = 4;
  localparam int AW = $clog2(NR * NC);
  localparam int IW = $clog2(NR);
  localparam logic [G_W-1:0] EP = eps_g(4), ED = eps_g(3);
  logic clk = 0;
  logic [X_W-1:0] x [NR];
  logic signed [D_W-1:0] d [NC];
  logic rd_en = 0, rd_dir = 0, rd_valid, rd_sat;
  logic [IW-1:0] rd_idx = 0;
  logic [SHIFT_W-1:0] adc_shift = 0;
  logic signed [ADC_W-1:0] rd_code;
  logic pulse = 0, pulse_pot = 0;
  logic [AW-1:0] pulse_addr = 0;
  logic init_we = 0;
  logic [AW-1:0] init_addr = 0;
  logic signed [G_W-1:0] init_val = 0;
  int checks = 0, failures = 0;
  int g [NR * NC];

  crossbar_array #(.N_ROW(NR), .N_COL(NC), .BACKWARD(1'b1), .EPS_P(EP), .EPS_D(ED)) dut (.*);

  // non-linear device, BETA = 2
  logic nl_pulse = 0, nl_pot = 0, nl_valid, nl_sat;
  logic signed [ADC_W-1:0] nl_code;
  crossbar_array #(.N_ROW(NR), .N_COL(NC), .BETA(2.0), .STEPS(14)) dut_nl (
    .clk, .x, .d, .rd_en(1'b0), .rd_dir(1'b0), .rd_idx('0), .adc_shift('0),
    .rd_valid(nl_valid), .rd_code(nl_code), .rd_sat(nl_sat),
    .pulse(nl_pulse), .pulse_pot(nl_pot), .pulse_addr('0),
    .init_we(init_we), .init_addr(init_addr), .init_val(init_val));

  // noisy device: programming and read noise
  localparam int PS = 400, RS = 300;
  logic nz_pulse = 0, nz_rd = 0, nz_valid, nz_sat;
  logic [X_W-1:0] nz_x [NR];
  logic signed [ADC_W-1:0] nz_code;
  crossbar_array #(.N_ROW(NR), .N_COL(NC), .PROG_SIGMA(PS), .READ_SIGMA(RS)) dut_nz (
    .clk, .x(nz_x), .d, .rd_en(nz_rd), .rd_dir(1'b0), .rd_idx('0), .adc_shift(SHIFT_W'(0)),
    .rd_valid(nz_valid), .rd_code(nz_code), .rd_sat(nz_sat),
    .pulse(nz_pulse), .pulse_pot(1'b1), .pulse_addr('0),
    .init_we(init_we), .init_addr(init_addr), .init_val(init_val));
  always #5 clk = ~clk;

  function automatic int adc(input longint s, input int sh);
    longint r;
    r = (sh == 0) ? s : ((s + (64'sd1 <<< (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  task automatic read(input bit dir, input int idx, input int sh, input int expv);
    @(negedge clk);
    rd_en = 1; rd_dir = dir; rd_idx = IW'(idx); adc_shift = SHIFT_W'(sh);
    @(negedge clk);
    rd_en = 0;
    checks++;
    if (!rd_valid || int'(rd_code) != expv) begin
      failures++;
      $display("FAIL dir=%0d idx=%0d code=%0d exp %0d valid=%0d", dir, idx, rd_code, expv, rd_valid);
    end
  endtask

  task automatic check_all();
    for (int j = 0; j < NC; j++) begin
      longint s = 0;
      for (int i = 0; i < NR; i++) s += longint'(g[j * NR + i]) * longint'(x[i]);
      read(0, j, ADC_FWD_SHIFT - 4, adc(s, ADC_FWD_SHIFT - 4));
    end
    for (int i = 0; i < NR; i++) begin
      longint s = 0;
      for (int j = 0; j < NC; j++) s += longint'(g[j * NR + i]) * longint'(d[j]);
      read(1, i, ADC_BWD_SHIFT - 3, adc(s, ADC_BWD_SHIFT - 3));
    end
  endtask

  task automatic prog_dev(input int a, input bit pot, input int width);
    int v;
    @(negedge clk);
    pulse = 1; pulse_pot = pot; pulse_addr = AW'(a);
    repeat (width) @(negedge clk);
    pulse = 0;
    @(negedge clk);
    v = g[a] + (pot ? int'(EP) : -int'(ED));
    if (v > (1 << G_FRAC)) v = 1 << G_FRAC;
    if (v < -(1 << G_FRAC)) v = -(1 << G_FRAC);
    g[a] = v;
  endtask

  initial begin
    for (int a = 0; a < NR * NC; a++) begin
      g[a] = int'($urandom_range(0, 2 << G_FRAC)) - (1 << G_FRAC);
      @(negedge clk);
      init_we = 1; init_addr = AW'(a); init_val = G_W'(g[a]);
    end
    @(negedge clk);
    init_we = 0;
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < NR; i++) x[i] = X_W'($urandom_range(0, 255));
      for (int j = 0; j < NC; j++) d[j] = D_W'($urandom_range(0, 255));
      check_all();
    end
    // programming: steps, long pulses, clipping at both ends
    for (int n = 0; n < 200; n++)
      prog_dev(int'($urandom_range(0, NR * NC - 1)), 1'($urandom_range(0, 1)),
              int'($urandom_range(1, 3)));
    for (int n = 0; n < 20; n++) prog_dev(0, 1'b1, 1);
    for (int n = 0; n < 20; n++) prog_dev(1, 1'b0, 1);
    for (int r = 0; r < 10; r++) begin
      for (int i = 0; i < NR; i++) x[i] = X_W'($urandom_range(0, 255));
      for (int j = 0; j < NC; j++) d[j] = D_W'($urandom_range(0, 255));
      check_all();
    end
    // the device levels themselves, read with one-hot inputs and no ADC scaling loss
    for (int i = 0; i < NR; i++) x[i] = '0;
    x[0] = 8'd1;
    read(0, 0, 7, adc(longint'(1 << G_FRAC), 7));   // clipped at +1
    x[0] = 8'd0; x[1] = 8'd1;
    read(0, 0, 7, adc(longint'(g[1]), 7));           // clipped at -1
    checks++;
    if (g[0] != (1 << G_FRAC) || g[1] != -(1 << G_FRAC)) begin failures++; $display("FAIL model clip"); end
    // ---- non-linear device: start at -1, potentiate STEPS times, then depress
    @(negedge clk); init_we = 1; init_addr = 0; init_val = -G_W'(1 << G_FRAC);
    @(negedge clk); init_we = 0;
    begin
      real alpha, w, dw;
      int  gexp, bad;
      alpha = 2.0 * ($exp(2.0) - 1.0) / (2.0 * 14.0);
      gexp = -(1 << G_FRAC); bad = 0;
      for (int n = 0; n < 28; n++) begin
        bit pot = (n < 14);
        @(negedge clk); nl_pulse = 1; nl_pot = pot;
        @(negedge clk); nl_pulse = 0;
        @(negedge clk);
        w = real'(gexp) / real'(1 << G_FRAC);
        dw = pot ? alpha * $exp(-2.0 * (w + 1.0) / 2.0) : alpha * $exp(-2.0 * (1.0 - w) / 2.0);
        gexp += (pot ? 1 : -1) * int'($floor(dw * real'(1 << G_FRAC) + 0.5));
        if (gexp > (1 << G_FRAC)) gexp = 1 << G_FRAC;
        if (gexp < -(1 << G_FRAC)) gexp = -(1 << G_FRAC);
        checks++;
        if (int'(dut_nl.g[0]) != gexp) begin
          failures++; $display("FAIL non-linear pulse %0d: g=%0d exp %0d", n, dut_nl.g[0], gexp);
        end
        // first step from -1 is large, the step near +1 small (state dependence)
        if (n == 13) begin
          checks++;
          if (int'(dut_nl.g[0]) < (1 << G_FRAC) - 1200) begin
            failures++; $display("FAIL 14 pulses do not span the range: g=%0d", dut_nl.g[0]);
          end
        end
      end
    end
    // ---- programming noise: mean step EPS, std PS
    begin
      real m, v;
      int prev, st;
      m = 0.0; v = 0.0;
      for (int n = 0; n < 400; n++) begin
        @(negedge clk); init_we = 1; init_addr = 0; init_val = 0;
        @(negedge clk); init_we = 0; nz_pulse = 1;
        @(negedge clk); nz_pulse = 0;
        @(negedge clk);
        st = int'(dut_nz.g[0]);
        m += real'(st); v += real'(st) * real'(st);
      end
      m = m / 400.0; v = v / 400.0 - m * m;
      checks++;
      if (m < real'(eps_g(4)) - 80.0 || m > real'(eps_g(4)) + 80.0 || $sqrt(v) < 0.8 * PS || $sqrt(v) > 1.2 * PS) begin
        failures++; $display("FAIL programming noise mean %f std %f", m, $sqrt(v));
      end
      $display("programming step mean %f std %f", m, $sqrt(v));
    end
    // ---- read noise: one device at 0.5 read with x = 1, no ADC scaling
    begin
      real m, v;
      @(negedge clk); init_we = 1; init_addr = 0; init_val = G_W'(1 << (G_FRAC - 1));
      @(negedge clk); init_we = 0;
      for (int i = 0; i < NR; i++) nz_x[i] = '0;
      nz_x[0] = 8'd1;
      m = 0.0; v = 0.0;
      for (int n = 0; n < 400; n++) begin
        @(negedge clk); nz_rd = 1;
        @(negedge clk); nz_rd = 0;
        m += real'(dut_nz.acc); v += real'(dut_nz.acc) * real'(dut_nz.acc);
      end
      m = m / 400.0; v = v / 400.0 - m * m;
      checks++;
      if (m < 8192.0 - 60.0 || m > 8192.0 + 60.0 || $sqrt(v) < 0.8 * RS || $sqrt(v) > 1.2 * RS) begin
        failures++; $display("FAIL read noise mean %f std %f", m, $sqrt(v));
      end
      $display("read mean %f std %f", m, $sqrt(v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
