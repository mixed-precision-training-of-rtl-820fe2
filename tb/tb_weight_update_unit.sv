// tb_weight_update_unit: checks dW = (eta * delta * x) >>> shift with
// saturation to the chi width against an integer reference.
module tb_weight_update_unit;
  import mp_pkg::*;
  logic [ETA_W-1:0] eta;
  logic signed [DH_W-1:0] delta;
  logic [X_W-1:0] x;
  logic [SHIFT_W-1:0] shift;
  logic signed [CHI_W-1:0] dw;
  int checks = 0, failures = 0;

  weight_update_unit dut (.eta, .delta, .x, .shift, .dw);

  task automatic check_one(input int e, input int d, input int xv, input int sh);
    longint prod, r, mx;
    eta = ETA_W'(e); delta = DH_W'(d); x = X_W'(xv); shift = SHIFT_W'(sh);
    #1;
    prod = longint'(e) * longint'(d) * longint'(xv);
    r = prod >>> sh;
    mx = (64'sd1 <<< (CHI_W - 1)) - 1;
    if (r > mx) r = mx;
    if (r < -mx - 1) r = -mx - 1;
    checks++;
    if (longint'(dw) != r) begin
      failures++;
      $display("FAIL eta=%0d d=%0d x=%0d sh=%0d: dw=%0d exp %0d", e, d, xv, sh, dw, r);
    end
  endtask

  initial begin
    check_one(41, 1000, 255, UPD1_SHIFT);
    check_one(41, -1000, 255, UPD1_SHIFT);
    check_one(255, -32768, 255, 0);      // saturates negative
    check_one(255, 32767, 255, 0);       // saturates positive
    check_one(1, -1, 1, 3);              // floor of a negative value
    check_one(0, 1234, 200, 5);
    for (int n = 0; n < 3000; n++)
      check_one(int'($urandom_range(0, 255)), int'($urandom_range(0, 65535)) - 32768,
                int'($urandom_range(0, 255)), int'($urandom_range(0, 30)));
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
