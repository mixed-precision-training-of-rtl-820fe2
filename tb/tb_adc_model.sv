// tb_adc_model: checks round-to-nearest division by 2^shift and clipping to
// the signed 8-bit code range, with the saturation flag.
module tb_adc_model;
  import mp_pkg::*;
  localparam int IW = 40;
  logic signed [IW-1:0] sum;
  logic [SHIFT_W-1:0] shift;
  logic signed [ADC_W-1:0] code;
  logic sat;
  int checks = 0, failures = 0, nsat = 0;

  adc_model #(.IW(IW)) dut (.sum, .shift, .code, .sat);

  task automatic check_one(input longint s, input int sh);
    longint r;
    int es;
    sum = IW'(s); shift = SHIFT_W'(sh);
    #1;
    r = (sh == 0) ? s : ((s + (64'sd1 <<< (sh - 1))) >>> sh);
    es = 0;
    if (r > 127) begin r = 127; es = 1; end
    if (r < -128) begin r = -128; es = 1; end
    nsat += es;
    checks++;
    if (longint'(code) != r || int'(sat) != es) begin
      failures++;
      $display("FAIL sum=%0d sh=%0d code=%0d exp %0d sat=%0d", s, sh, code, r, sat);
    end
  endtask

  initial begin
    check_one(0, ADC_FWD_SHIFT);
    check_one(64'sd1 <<< 17, 18);       // 0.5 rounds up to 1
    check_one(-(64'sd1 <<< 17), 18);    // -0.5 rounds to 0
    check_one(64'sd127 <<< 18, 18);
    check_one(64'sd128 <<< 18, 18);     // clips
    check_one(-(64'sd200 <<< 16), 16);  // clips
    check_one(77, 0);
    for (int n = 0; n < 3000; n++) begin
      longint s;
      s = longint'($urandom_range(0, 32'hFFFFFFFF)) - 64'sd2147483648;
      check_one(s, int'($urandom_range(0, 30)));
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation exercised"); end
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
