// tb_error_unit: checks the output errors (t - x) f' for a one-hot target,
// the choice of the normalisation exponent s (largest that keeps every DAC
// code within 8 bits) and the normalised DAC codes.
module tb_error_unit;
  import mp_pkg::*;
  localparam int N = N_OUT;
  logic [X_W-1:0] x [N];
  logic [FP_W-1:0] fp [N];
  logic [$clog2(N)-1:0] label;
  logic signed [D_W-1:0] d_dac [N];
  logic [SHIFT_W-1:0] norm_s;
  logic signed [17:0] delta [N];
  int checks = 0, failures = 0;
  int n_s_small = 0, n_s_max = 0;

  error_unit dut (.x, .fp, .label, .d_dac, .norm_s, .delta);

  task automatic run(input int scale);
    int dl [N];
    int m, s_exp;
    label = $clog2(N)'($urandom_range(0, N - 1));
    for (int k = 0; k < N; k++) begin
      int xv;
      xv = int'($urandom_range(0, scale));
      if (k == int'(label)) xv = 255 - xv;
      x[k] = X_W'(xv);
      fp[k] = FP_W'((xv * (256 - xv)) / 256);
    end
    #1;
    m = 0;
    for (int k = 0; k < N; k++) begin
      dl[k] = ((k == int'(label)) ? 256 : 0) - int'(x[k]);
      dl[k] = dl[k] * int'(fp[k]);
      if ((dl[k] < 0 ? -dl[k] : dl[k]) > m) m = (dl[k] < 0 ? -dl[k] : dl[k]);
    end
    s_exp = 0;
    for (int s = 0; s <= int'(NORM_MAX); s++) if ((m >> (NORM_MAX - s)) <= 127) s_exp = s;
    if (s_exp == int'(NORM_MAX)) n_s_max++; else n_s_small++;
    checks++;
    if (int'(norm_s) != s_exp) begin
      failures++;
      $display("FAIL norm_s=%0d exp %0d (max %0d)", norm_s, s_exp, m);
    end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (int'(delta[k]) != dl[k] || int'(d_dac[k]) != (dl[k] >>> (NORM_MAX - s_exp))) begin
        failures++;
        $display("FAIL k=%0d delta=%0d exp %0d dac=%0d", k, delta[k], dl[k], d_dac[k]);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) run(255);   // untrained: large errors
    for (int n = 0; n < 300; n++) run(3);     // nearly correct: small errors
    checks++;
    if (n_s_small == 0 || n_s_max == 0) begin
      failures++;
      $display("FAIL normalisation range not exercised %0d %0d", n_s_small, n_s_max);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
