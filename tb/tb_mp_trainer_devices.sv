// tb_mp_trainer_devices: trains the reduced 12-6-4 trainer with the device
// non-idealities of the crossbar model switched on, one instance each:
//   a) strongly non-linear devices (BETA = 5, 14 pulses span the range),
//   b) programming stochasticity with a standard deviation of one step,
//   c) read noise of 5 % of the weight range on every product.
// All three instances see the same fixed image and label and are trained
// 40 times. The test checks that each one programs its devices and that its
// squared output error on that image falls below its value before training.
module tb_mp_trainer_devices;
  import mp_pkg::*;
  localparam int NI = 12, NH = 6, NO = 4, C = 3;
  localparam int D1 = (NI + 1) * NH, D2 = (NH + 1) * NO;
  localparam int A1W = $clog2(D1), LW = $clog2(NO), PXW = $clog2(NI);

  logic clk = 0, rst_n = 0;
  logic pix_we = 0;
  logic [PXW-1:0] pix_addr = 0;
  logic [X_W-1:0] pix_data = 0;
  logic [LW-1:0] label = 2;
  logic start = 0, train = 1, clear_chi = 0;
  logic [ETA_W-1:0] eta = 8'd255;
  logic [CHI_W-1:0] eps_p, eps_d;
  logic init_we = 0, init_layer = 0;
  logic [A1W-1:0] init_addr = 0;
  logic signed [G_W-1:0] init_val = 0;
  logic busy [C], done [C];
  logic [LW-1:0] pred [C];
  logic [X_W-1:0] out_x [C][NO];
  logic [SHIFT_W-1:0] norm_s [C];
  logic [31:0] n_upd [C], n_pul [C], n_st [C], n_ps [C], n_as [C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mp_trainer #(.NI(NI), .NH(NH), .NO(NO), .DEV_BETA(5.0)) dut_nl (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .label, .start, .train, .clear_chi, .eta, .eps_p, .eps_d,
    .busy(busy[0]), .done(done[0]), .pred(pred[0]), .out_x(out_x[0]), .norm_s(norm_s[0]),
    .init_we, .init_layer, .init_addr, .init_val,
    .n_dev_updates(n_upd[0]), .n_pulses(n_pul[0]), .n_stalls(n_st[0]), .n_pulse_sat(n_ps[0]), .n_adc_sat(n_as[0]));
  mp_trainer #(.NI(NI), .NH(NH), .NO(NO), .DEV_PROG_SIGMA(int'(eps_g(4)))) dut_ps (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .label, .start, .train, .clear_chi, .eta, .eps_p, .eps_d,
    .busy(busy[1]), .done(done[1]), .pred(pred[1]), .out_x(out_x[1]), .norm_s(norm_s[1]),
    .init_we, .init_layer, .init_addr, .init_val,
    .n_dev_updates(n_upd[1]), .n_pulses(n_pul[1]), .n_stalls(n_st[1]), .n_pulse_sat(n_ps[1]), .n_adc_sat(n_as[1]));
  mp_trainer #(.NI(NI), .NH(NH), .NO(NO), .DEV_READ_SIGMA(1638)) dut_rn (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .label, .start, .train, .clear_chi, .eta, .eps_p, .eps_d,
    .busy(busy[2]), .done(done[2]), .pred(pred[2]), .out_x(out_x[2]), .norm_s(norm_s[2]),
    .init_we, .init_layer, .init_addr, .init_val,
    .n_dev_updates(n_upd[2]), .n_pulses(n_pul[2]), .n_stalls(n_st[2]), .n_pulse_sat(n_ps[2]), .n_adc_sat(n_as[2]));

  function automatic int sq_err(input int c);
    int e = 0;
    for (int k = 0; k < NO; k++) begin
      int t = ((k == int'(label)) ? 256 : 0) - int'(out_x[c][k]);
      e += t * t;
    end
    return e;
  endfunction

  task automatic step(input bit tr);
    train = tr;
    @(negedge clk);
    while (busy[0] || busy[1] || busy[2]) @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    // the three instances may finish at different times
    fork
      begin while (!done[0]) @(negedge clk); end
      begin while (!done[1]) @(negedge clk); end
      begin while (!done[2]) @(negedge clk); end
    join
  endtask

  initial begin
    int e0 [C], e1 [C];
    eps_p = eps_chi(4); eps_d = eps_chi(4);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    while (busy[0] || busy[1] || busy[2]) @(negedge clk);
    for (int a = 0; a < D1 + D2; a++) begin
      int r;
      r = int'($urandom_range(0, 5));
      @(negedge clk);
      init_we = 1; init_layer = (a >= D1); init_addr = A1W'(a >= D1 ? a - D1 : a);
      init_val = (r == 0) ? G_W'(1 << G_FRAC) : (r == 1) ? -G_W'(1 << G_FRAC) : '0;
    end
    for (int i = 0; i < NI; i++) begin
      @(negedge clk);
      init_we = 0; pix_we = 1; pix_addr = PXW'(i); pix_data = X_W'((i * 53) % 256);
    end
    @(negedge clk); pix_we = 0;
    step(1'b0);
    for (int c = 0; c < C; c++) e0[c] = sq_err(c);
    for (int n = 0; n < 40; n++) step(1'b1);
    step(1'b0);
    for (int c = 0; c < C; c++) begin
      e1[c] = sq_err(c);
      $display("instance %0d: squared error %0d -> %0d, device updates %0d, pulses %0d", c, e0[c], e1[c], n_upd[c], n_pul[c]);
      checks += 2;
      if (n_upd[c] == 0) begin failures++; $display("FAIL instance %0d programmed nothing", c); end
      if (!(e1[c] < e0[c])) begin failures++; $display("FAIL instance %0d did not learn", c); end
    end
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
