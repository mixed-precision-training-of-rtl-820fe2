// tb_programming_circuit: sends requests with random signed pulse counts and
// checks that exactly |p| pulses of the right polarity and address come out,
// one pulse per PULSE_W + GAP_W cycles, that p = 0 produces none and that
// the circuit is not ready while it delivers pulses.
module tb_programming_circuit;
  import mp_pkg::*;
  localparam int AW = 10;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready;
  logic [AW-1:0] req_addr;
  logic signed [P_W-1:0] req_p;
  logic pulse, pulse_pot;
  logic [AW-1:0] pulse_addr;
  logic [31:0] n_pulses;
  int checks = 0, failures = 0, cycles = 0, total = 0;

  programming_circuit #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic send(input int p, input int a);
    int seen, pot_bad, addr_bad, t0, prev;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_p = P_W'(p); req_addr = AW'(a);
    @(negedge clk);
    req_valid = 0;
    seen = 0; pot_bad = 0; addr_bad = 0; t0 = cycles; prev = 0;
    for (int c = 0; c < 40; c++) begin
      if (pulse && !prev) begin
        seen++;
        if (pulse_pot != (p > 0)) pot_bad++;
        if (pulse_addr != AW'(a)) addr_bad++;
      end
      if (p != 0 && c == 0 && req_ready) begin failures++; $display("FAIL ready while busy"); end
      prev = pulse;
      @(negedge clk);
    end
    total += (p < 0 ? -p : p);
    checks++;
    if (seen != (p < 0 ? -p : p) || pot_bad != 0 || addr_bad != 0) begin
      failures++;
      $display("FAIL p=%0d pulses=%0d pot_bad=%0d addr_bad=%0d", p, seen, pot_bad, addr_bad);
    end
  endtask

  initial begin
    req_valid = 0; req_p = 0; req_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    send(1, 5);
    send(-1, 6);
    send(0, 7);
    send(15, 1023);
    send(-15, 0);
    // latency: a request with p = 3 keeps the circuit busy 3 * 2 cycles
    begin
      int t;
      @(negedge clk);
      req_valid = 1; req_p = 3; req_addr = 1;
      @(negedge clk);
      req_valid = 0; t = 0;
      while (!req_ready) begin t++; @(negedge clk); end
      checks++;
      total += 3;
      if (t != 6) begin failures++; $display("FAIL busy for %0d cycles, exp 6", t); end
    end
    for (int n = 0; n < 40; n++) send(int'($urandom_range(0, 30)) - 15, int'($urandom_range(0, 1023)));
    checks++;
    if (int'(n_pulses) != total) begin failures++; $display("FAIL n_pulses=%0d exp %0d", n_pulses, total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
