// tb_chi_accumulator: drives random weight updates to random synapses, with
// a programming side that is randomly slow, and compares every programming
// request (address, p) with a reference model of the chi memory. Checks the
// clear sweep (not ready for DEPTH cycles after reset, then all chi = 0),
// the two-cycle update rate, stalls, and the asymmetric granularities.
module tb_chi_accumulator;
  import mp_pkg::*;
  localparam int DEPTH = 64;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, clear = 0;
  logic [CHI_W-1:0] eps_p, eps_d;
  logic in_valid, in_ready;
  logic [AW-1:0] in_addr;
  logic signed [CHI_W-1:0] in_dw;
  logic prog_valid, prog_ready;
  logic [AW-1:0] prog_addr;
  logic signed [P_W-1:0] prog_p;
  logic [31:0] n_updates, n_stalls, n_sat;
  int checks = 0, failures = 0, cycles = 0;
  longint model [DEPTH];
  int exp_q_addr [$];
  int exp_q_p [$];
  int got = 0, slow = 0;

  chi_accumulator #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // programming side: randomly not ready, checks requests against the model
  always @(posedge clk) begin
    if (rst_n && prog_valid && prog_ready) begin
      checks++;
      got++;
      if (exp_q_addr.size() == 0) begin
        failures++; $display("FAIL unexpected request addr=%0d p=%0d", prog_addr, prog_p);
      end else begin
        int ea, ep;
        ea = exp_q_addr.pop_front(); ep = exp_q_p.pop_front();
        if (int'(prog_addr) != ea || int'(prog_p) != ep) begin
          failures++;
          $display("FAIL request addr=%0d p=%0d exp addr=%0d p=%0d", prog_addr, prog_p, ea, ep);
        end
      end
    end
  end
  always @(negedge clk) begin
    prog_ready <= ($urandom_range(0, 3) != 0);
    if (prog_ready == 0) slow++;
  end

  function automatic void model_update(input int a, input longint dw);
    longint c, e, q, mx;
    mx = (64'sd1 <<< (CHI_W - 1)) - 1;
    c = model[a] + dw;
    if (c > mx) c = mx;
    if (c < -mx - 1) c = -mx - 1;
    e = (c >= 0) ? longint'(eps_p) : longint'(eps_d);
    q = (c >= 0 ? c : -c) / e;
    if (q > P_MAX) q = P_MAX;
    if (c < 0) q = -q;
    model[a] = c - q * e;
    if (q != 0) begin
      exp_q_addr.push_back(a);
      exp_q_p.push_back(int'(q));
    end
  endfunction

  task automatic send(input int a, input longint dw);
    @(negedge clk);
    in_valid = 1; in_addr = AW'(a); in_dw = CHI_W'(dw);
    while (!in_ready) @(negedge clk);
    model_update(a, dw);        // taken on the coming rising edge
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int t0, t;
    in_valid = 0; in_addr = 0; in_dw = 0;
    eps_p = eps_chi(4); eps_d = eps_chi(3);   // asymmetric
    for (int a = 0; a < DEPTH; a++) model[a] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 0;
    while (!in_ready) begin @(negedge clk); t++; end
    checks++;
    if (t != DEPTH) begin failures++; $display("FAIL clear took %0d cycles, exp %0d", t, DEPTH); end
    // small positive then negative update: nothing to program yet
    send(3, 100);
    send(3, -50);
    // many small updates that add up to device steps
    for (int n = 0; n < 3000; n++)
      send(int'($urandom_range(0, DEPTH - 1)), longint'($urandom_range(0, 8000)) - 4000);
    // large updates that saturate the pulse count
    send(9, 20 * longint'(eps_p));
    send(9, -40 * longint'(eps_d));
    // throughput: with no pulse to deliver an update takes two cycles
    @(negedge clk);
    in_valid = 1; in_dw = 1; in_addr = 0;
    t0 = cycles;
    for (int n = 0; n < 10; n++) begin
      while (!in_ready) @(negedge clk);
      model_update(0, 1);
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (cycles - t0 > 21) begin failures++; $display("FAIL 10 updates took %0d cycles", cycles - t0); end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q_addr.size() != 0 || int'(n_updates) != got || n_stalls == 0 || n_sat != 2) begin
      failures++;
      $display("FAIL pending=%0d n_updates=%0d got=%0d stalls=%0d sat=%0d",
               exp_q_addr.size(), n_updates, got, n_stalls, n_sat);
    end
    // clear: afterwards chi is zero everywhere, so eps-1 gives no request
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int a = 0; a < DEPTH; a++) model[a] = 0;
    for (int a = 0; a < DEPTH; a++) send(a, longint'(eps_p) - 1);
    for (int a = 0; a < DEPTH; a++) send(a, 1);     // now every synapse fires once
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q_addr.size() != 0) begin failures++; $display("FAIL after clear: %0d pending", exp_q_addr.size()); end
    $display("requests=%0d stalls=%0d", got, n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
