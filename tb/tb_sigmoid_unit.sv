// tb_sigmoid_unit: sweeps every Q4.4 input code and compares the activation
// with the PLAN piecewise-linear sigmoid evaluated in real arithmetic, and
// with the exact logistic function within the approximation's error; checks
// f' = x(1-x).
module tb_sigmoid_unit;
  import mp_pkg::*;
  logic signed [ADC_W-1:0] z;
  logic [X_W-1:0] x;
  logic [FP_W-1:0] fp;
  int checks = 0, failures = 0;

  sigmoid_unit dut (.z, .x, .fp);

  function automatic real plan(input real v);
    real a, f;
    a = (v < 0.0) ? -v : v;
    if (a >= 5.0)        f = 1.0;
    else if (a >= 2.375) f = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   f = 0.125 * a + 0.625;
    else                 f = 0.25 * a + 0.5;
    return (v < 0.0) ? 1.0 - f : f;
  endfunction

  initial begin
    for (int c = -128; c < 128; c++) begin
      real zv, ref_f, ex;
      int  xr, fr;
      z = ADC_W'(c);
      #1;
      zv = real'(c) / 16.0;
      // f(|z|) truncated to Q0.8, then f(-z) = 1 - f(|z|) exactly
      ref_f = plan(zv < 0.0 ? -zv : zv);
      xr = int'($floor(ref_f * 256.0 + 0.0001));
      if (zv < 0.0) xr = 256 - xr;
      if (xr > 255) xr = 255;
      fr = (xr * (256 - xr)) / 256;
      checks++;
      if (int'(x) != xr || int'(fp) != fr) begin
        failures++;
        $display("FAIL z=%0d x=%0d exp %0d fp=%0d exp %0d", c, x, xr, fp, fr);
      end
      ex = 1.0 / (1.0 + $exp(-zv));
      checks++;
      if ((real'(x) / 256.0 - ex) > 0.025 || (ex - real'(x) / 256.0) > 0.025) begin
        failures++;
        $display("FAIL z=%0d x=%0d far from logistic %f", c, x, ex);
      end
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
