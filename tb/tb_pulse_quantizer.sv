// tb_pulse_quantizer: checks p = trunc(chi/eps) toward zero, the residual
// chi - p*eps, the P_MAX saturation and the separate potentiation and
// depression granularities against an integer reference.
module tb_pulse_quantizer;
  import mp_pkg::*;
  logic signed [CHI_W-1:0] chi, chi_res;
  logic [CHI_W-1:0] eps_p, eps_d;
  logic signed [P_W-1:0] p;
  logic sat;
  int checks = 0, failures = 0;

  pulse_quantizer dut (.chi, .eps_p, .eps_d, .p, .chi_res, .sat);

  task automatic check_one(input int c, input int ep, input int ed);
    int e, q, ep_q, er, es;
    chi = CHI_W'(c); eps_p = CHI_W'(ep); eps_d = CHI_W'(ed);
    #1;
    e = (c >= 0) ? ep : ed;
    q = (e == 0) ? 0 : ((c >= 0 ? c : -c) / e);
    es = (q > int'(P_MAX)) ? 1 : 0;
    if (q > int'(P_MAX)) q = P_MAX;
    ep_q = (c >= 0) ? q : -q;
    er = c - ep_q * e;
    checks++;
    if (int'(p) != ep_q || int'(chi_res) != er || int'(sat) != es) begin
      failures++;
      $display("FAIL chi=%0d eps=%0d/%0d: p=%0d (exp %0d) res=%0d (exp %0d) sat=%0d",
               c, ep, ed, p, ep_q, chi_res, er, sat);
    end
  endtask

  initial begin
    automatic int e4 = int'(eps_chi(4));
    // directed: below, at, and above one step; both signs; asymmetric
    check_one(0, e4, e4);
    check_one(e4 - 1, e4, e4);
    check_one(e4, e4, e4);
    check_one(-e4, e4, e4);
    check_one(-(e4 - 1), e4, e4);
    check_one(3 * e4 + 5, e4, e4);
    check_one(-(2 * e4 + 7), e4, e4);
    check_one(100 * e4, e4, e4);          // saturation
    check_one(-100 * e4, e4, e4);
    check_one(5 * int'(eps_chi(8)), int'(eps_chi(8)), int'(eps_chi(2)));
    check_one(-5 * int'(eps_chi(8)), int'(eps_chi(8)), int'(eps_chi(2)));
    check_one(12345, 0, e4);              // disabled direction
    if (e4 != 9362) begin failures++; $display("FAIL eps_chi(4)=%0d", e4); end
    checks++;
    for (int n = 0; n < 2000; n++) begin
      int c;
      c = int'($urandom_range(0, 2000000)) - 1000000;
      check_one(c, int'($urandom_range(1, 300000)), int'($urandom_range(1, 300000)));
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
