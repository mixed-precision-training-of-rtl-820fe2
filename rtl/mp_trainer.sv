// mp_trainer: mixed-precision trainer for a two-layer sigmoid network
// (784 inputs -> 250 hidden -> 10 outputs, each layer with a bias input of 1).
//
// Each layer's weights live as conductances in a crossbar_array (the
// computational memory unit). The digital unit around them runs
// backpropagation for one image at a time:
//   FWD1  hidden sums  sum_i W_ji x_i from array 1 -> sigmoid -> x_j, f'_j
//   FWD2  output sums  from array 2                -> sigmoid -> x_k, f'_k
//   ERR   delta_k = (t_k - x_k) f'_k, normalised to the 8-bit DAC (error_unit)
//   BWD   transposed product sum_k W_kj delta_k from array 2;
//         hidden delta_j = that sum * f'_j
//   UPD2  for every synapse of layer 2: dW = eta delta_k x_j (weight_update_unit),
//         accumulated in chi (chi_accumulator); when |chi| >= eps the
//         programming circuit sends p = trunc(chi/eps) pulses to the device
//   UPD1  the same for the 785 x 250 synapses of layer 1
// In inference mode (train = 0) the run ends after FWD2. The predicted class
// is the output neuron with the largest activation.
//
// Interface: the host writes the 784 pixel codes (Q0.8) with pix_we, sets
// label, train, eta (Q0.12), eps_p / eps_d (chi format, Q8.16), pulses
// start while busy is low, and waits for done (one-cycle pulse). Initial
// conductances are written through init_* (layer 0 or 1). After reset the
// chi memories clear themselves, which keeps busy high for
// (N_IN+1)*N_HID cycles.
//
// Timing: FWD1 N_HID+1 cycles, FWD2 N_OUT+1, ERR 1, BWD N_HID+1, then two
// cycles per synapse in UPD2 and UPD1 plus stall cycles while a device is
// still receiving pulses.
//
// The stage order, the chi scheme and the use of one array per layer for
// both directions follow the paper; the device options of the crossbar model
// (non-linear response, programming and read noise, off by default) are
// passed through as DEV_* parameters; the number formats, the sequencing, one
// read-out per cycle and the sizes of the pulse counter are this design's.
module mp_trainer
  import mp_pkg::*;
#(
  parameter int unsigned NI = N_IN,
  parameter int unsigned NH = N_HID,
  parameter int unsigned NO = N_OUT,
  parameter logic [G_W-1:0] DEV_EPS_P = eps_g(4),
  parameter logic [G_W-1:0] DEV_EPS_D = eps_g(4),
  parameter real         DEV_BETA       = 0.0,  // device non-linearity (0: linear)
  parameter int unsigned DEV_STEPS      = 14,   // pulses spanning the range if non-linear
  parameter int unsigned DEV_PROG_SIGMA = 0,    // programming noise, Q2.14 LSBs
  parameter int unsigned DEV_READ_SIGMA = 0,    // read noise, Q2.14 LSBs
  localparam int unsigned DEPTH1 = (NI + 1) * NH,
  localparam int unsigned DEPTH2 = (NH + 1) * NO,
  localparam int unsigned A1W    = $clog2(DEPTH1),
  localparam int unsigned A2W    = $clog2(DEPTH2),
  localparam int unsigned PXW    = $clog2(NI),
  localparam int unsigned LW     = $clog2(NO)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // image and label
  input  logic                    pix_we,
  input  logic [PXW-1:0]          pix_addr,
  input  logic [X_W-1:0]          pix_data,
  input  logic [LW-1:0]           label,
  // control
  input  logic                    start,
  input  logic                    train,
  input  logic                    clear_chi,
  input  logic [ETA_W-1:0]        eta,
  input  logic [CHI_W-1:0]        eps_p,
  input  logic [CHI_W-1:0]        eps_d,
  output logic                    busy,
  output logic                    done,
  // results
  output logic [LW-1:0]           pred,
  output logic [X_W-1:0]          out_x [NO],
  output logic [SHIFT_W-1:0]      norm_s,
  // weight initialisation
  input  logic                    init_we,
  input  logic                    init_layer,   // 0: layer 1, 1: layer 2
  input  logic [A1W-1:0]          init_addr,
  input  logic signed [G_W-1:0]   init_val,
  // statistics
  output logic [31:0]             n_dev_updates,
  output logic [31:0]             n_pulses,
  output logic [31:0]             n_stalls,
  output logic [31:0]             n_pulse_sat,
  output logic [31:0]             n_adc_sat
);
  typedef enum logic [3:0] {
    S_IDLE, S_FWD1, S_FWD2, S_ERR, S_BWD, S_UPD2, S_UPD1, S_DRAIN, S_DONE
  } state_t;
  state_t state;

  // ---------------------------------------------------------------- buffers
  logic [X_W-1:0]         pix   [NI];
  logic [X_W-1:0]         x0    [NI + 1];
  logic [X_W-1:0]         x1    [NH + 1];
  logic [FP_W-1:0]        fp1   [NH];
  logic [X_W-1:0]         x2    [NO];
  logic [FP_W-1:0]        fp2   [NO];
  logic signed [D_W-1:0]  dout  [NO];     // normalised output errors
  logic signed [DH_W-1:0] dhid  [NH];     // hidden errors
  logic [SHIFT_W-1:0]     s_q;

  always_comb begin
    for (int i = 0; i < NI; i++) x0[i] = pix[i];
    x0[NI] = '1;                          // bias input
  end

  always_ff @(posedge clk)
    if (pix_we && !busy) pix[pix_addr] <= pix_data;

  // ---------------------------------------------------------------- arrays
  localparam int unsigned I1W = $clog2(NI + 1 > NH ? NI + 1 : NH);
  localparam int unsigned I2W = $clog2(NH + 1 > NO ? NH + 1 : NO);

  logic                    rd1_en, rd2_en, rd2_dir;
  logic [I1W-1:0]          rd1_idx;
  logic [I2W-1:0]          rd2_idx;
  logic [SHIFT_W-1:0]      rd2_shift;
  logic                    rd1_valid, rd2_valid, rd1_sat, rd2_sat;
  logic signed [ADC_W-1:0] rd1_code, rd2_code;
  logic signed [D_W-1:0]   d1_unused [NH];
  logic                    pulse1, pulse1_pot, pulse2, pulse2_pot;
  logic [A1W-1:0]          pulse1_addr;
  logic [A2W-1:0]          pulse2_addr;

  always_comb for (int j = 0; j < NH; j++) d1_unused[j] = '0;

  crossbar_array #(
    .N_ROW(NI + 1), .N_COL(NH), .BACKWARD(1'b0), .EPS_P(DEV_EPS_P), .EPS_D(DEV_EPS_D),
    .BETA(DEV_BETA), .STEPS(DEV_STEPS), .PROG_SIGMA(DEV_PROG_SIGMA), .READ_SIGMA(DEV_READ_SIGMA)
  ) u_xbar1 (
    .clk, .x(x0), .d(d1_unused),
    .rd_en(rd1_en), .rd_dir(1'b0), .rd_idx(rd1_idx), .adc_shift(SHIFT_W'(ADC_FWD_SHIFT)),
    .rd_valid(rd1_valid), .rd_code(rd1_code), .rd_sat(rd1_sat),
    .pulse(pulse1), .pulse_pot(pulse1_pot), .pulse_addr(pulse1_addr),
    .init_we(init_we && !init_layer), .init_addr(init_addr), .init_val
  );

  crossbar_array #(
    .N_ROW(NH + 1), .N_COL(NO), .BACKWARD(1'b1), .EPS_P(DEV_EPS_P), .EPS_D(DEV_EPS_D),
    .BETA(DEV_BETA), .STEPS(DEV_STEPS), .PROG_SIGMA(DEV_PROG_SIGMA), .READ_SIGMA(DEV_READ_SIGMA)
  ) u_xbar2 (
    .clk, .x(x1), .d(dout),
    .rd_en(rd2_en), .rd_dir(rd2_dir), .rd_idx(rd2_idx), .adc_shift(rd2_shift),
    .rd_valid(rd2_valid), .rd_code(rd2_code), .rd_sat(rd2_sat),
    .pulse(pulse2), .pulse_pot(pulse2_pot), .pulse_addr(pulse2_addr),
    .init_we(init_we && init_layer), .init_addr(A2W'(init_addr)), .init_val
  );

  // ---------------------------------------------------------------- neuron
  logic signed [ADC_W-1:0] z;
  logic [X_W-1:0]          fx;
  logic [FP_W-1:0]         ffp;
  assign z = (state == S_FWD1) ? rd1_code : rd2_code;
  sigmoid_unit u_sig (.z(z), .x(fx), .fp(ffp));

  // ---------------------------------------------------------------- errors
  logic signed [D_W-1:0]   eu_dac [NO];
  logic [SHIFT_W-1:0]      eu_s;
  logic signed [17:0]      eu_delta [NO];
  error_unit #(.N(NO)) u_err (
    .x(x2), .fp(fp2), .label(label), .d_dac(eu_dac), .norm_s(eu_s), .delta(eu_delta)
  );

  // ---------------------------------------------------------------- updates
  logic signed [DH_W-1:0]  wu_delta;
  logic [X_W-1:0]          wu_x;
  logic [SHIFT_W-1:0]      wu_shift;
  logic signed [CHI_W-1:0] wu_dw;
  weight_update_unit u_wu (.eta(eta), .delta(wu_delta), .x(wu_x), .shift(wu_shift), .dw(wu_dw));

  logic             c1_valid, c1_ready, c2_valid, c2_ready;
  logic [A1W-1:0]   addr1;
  logic [A2W-1:0]   addr2;
  logic             pr1_valid, pr1_ready, pr2_valid, pr2_ready;
  logic [A1W-1:0]   pr1_addr;
  logic [A2W-1:0]   pr2_addr;
  logic signed [P_W-1:0] pr1_p, pr2_p;
  logic [31:0] c1_upd, c1_stall, c1_sat, c2_upd, c2_stall, c2_sat, pc1_n, pc2_n;

  chi_accumulator #(.DEPTH(DEPTH1)) u_chi1 (
    .clk, .rst_n, .clear(clear_chi && state == S_IDLE), .eps_p, .eps_d,
    .in_valid(c1_valid), .in_ready(c1_ready), .in_addr(addr1), .in_dw(wu_dw),
    .prog_valid(pr1_valid), .prog_ready(pr1_ready), .prog_addr(pr1_addr), .prog_p(pr1_p),
    .n_updates(c1_upd), .n_stalls(c1_stall), .n_sat(c1_sat)
  );
  chi_accumulator #(.DEPTH(DEPTH2)) u_chi2 (
    .clk, .rst_n, .clear(clear_chi && state == S_IDLE), .eps_p, .eps_d,
    .in_valid(c2_valid), .in_ready(c2_ready), .in_addr(addr2), .in_dw(wu_dw),
    .prog_valid(pr2_valid), .prog_ready(pr2_ready), .prog_addr(pr2_addr), .prog_p(pr2_p),
    .n_updates(c2_upd), .n_stalls(c2_stall), .n_sat(c2_sat)
  );
  programming_circuit #(.AW(A1W)) u_prog1 (
    .clk, .rst_n, .req_valid(pr1_valid), .req_ready(pr1_ready), .req_addr(pr1_addr),
    .req_p(pr1_p), .pulse(pulse1), .pulse_pot(pulse1_pot), .pulse_addr(pulse1_addr),
    .n_pulses(pc1_n)
  );
  programming_circuit #(.AW(A2W)) u_prog2 (
    .clk, .rst_n, .req_valid(pr2_valid), .req_ready(pr2_ready), .req_addr(pr2_addr),
    .req_p(pr2_p), .pulse(pulse2), .pulse_pot(pulse2_pot), .pulse_addr(pulse2_addr),
    .n_pulses(pc2_n)
  );

  assign n_dev_updates = c1_upd + c2_upd;
  assign n_pulses      = pc1_n + pc2_n;
  assign n_stalls      = c1_stall + c2_stall;
  assign n_pulse_sat   = c1_sat + c2_sat;

  // ---------------------------------------------------------------- sequencer
  logic [I1W-1:0] cnt;        // read-out index
  logic           pend;       // a read-out result arrives this cycle
  logic [I1W-1:0] pidx;       // its index
  logic [I1W-1:0] outer;      // post-synaptic neuron in UPD1/UPD2
  logic [I1W-1:0] inner;      // pre-synaptic neuron in UPD1/UPD2
  logic           idle_all;

  assign idle_all = c1_ready && c2_ready && pr1_ready && pr2_ready && !pr1_valid && !pr2_valid;
  assign busy     = (state != S_IDLE) || !idle_all;

  assign rd1_en    = (state == S_FWD1) && (cnt < I1W'(NH));
  assign rd1_idx   = cnt;
  assign rd2_en    = ((state == S_FWD2) && (cnt < I1W'(NO))) || ((state == S_BWD) && (cnt < I1W'(NH)));
  assign rd2_dir   = (state == S_BWD);
  assign rd2_idx   = I2W'(cnt);
  assign rd2_shift = (state == S_BWD) ? SHIFT_W'(ADC_BWD_SHIFT) : SHIFT_W'(ADC_FWD_SHIFT);

  always_comb begin
    if (state == S_UPD2) begin
      wu_delta = DH_W'(dout[outer]);
      wu_x     = x1[inner];
      wu_shift = SHIFT_W'(UPD2_SHIFT) + s_q;
    end else begin
      wu_delta = dhid[outer];
      wu_x     = x0[inner];
      wu_shift = SHIFT_W'(UPD1_SHIFT) + s_q;
    end
  end
  assign c2_valid = (state == S_UPD2);
  assign c1_valid = (state == S_UPD1);

  logic [LW-1:0]  amax;
  always_comb begin
    amax = '0;
    for (int k = 1; k < NO; k++) if (x2[k] > x2[amax]) amax = LW'(k);
  end

  always_comb for (int k = 0; k < NO; k++) out_x[k] = x2[k];
  assign norm_s = s_q;

  always_ff @(posedge clk) begin
    if (pend && state == S_FWD1) begin
      x1[pidx]  <= fx;
      fp1[pidx] <= ffp;
    end
    if (pend && state == S_FWD2) begin
      x2[pidx]  <= fx;
      fp2[pidx] <= ffp;
    end
    if (pend && state == S_BWD)
      dhid[pidx] <= DH_W'(rd2_code) * $signed({8'b0, fp1[pidx]});
    if (state == S_ERR)
      for (int k = 0; k < NO; k++) dout[k] <= eu_dac[k];
    x1[NH] <= '1;                         // bias neuron of the hidden layer
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      pend      <= 1'b0;
      pidx      <= '0;
      outer     <= '0;
      inner     <= '0;
      addr1     <= '0;
      addr2     <= '0;
      s_q       <= '0;
      pred      <= '0;
      done      <= 1'b0;
      n_adc_sat <= '0;
    end else begin
      done <= 1'b0;
      pend <= rd1_en || rd2_en;
      pidx <= cnt;
      if (pend && ((state == S_FWD1 && rd1_sat) || (state != S_FWD1 && rd2_sat)))
        n_adc_sat <= n_adc_sat + 32'd1;
      unique case (state)
        S_IDLE: if (start && idle_all) begin
          state <= S_FWD1;
          cnt   <= '0;
        end
        S_FWD1: begin
          if (cnt == I1W'(NH)) begin
            state <= S_FWD2;
            cnt   <= '0;
          end else cnt <= cnt + I1W'(1);
        end
        S_FWD2: begin
          if (cnt == I1W'(NO)) begin
            state <= S_ERR;
            cnt   <= '0;
          end else cnt <= cnt + I1W'(1);
        end
        S_ERR: begin
          s_q  <= eu_s;
          pred <= amax;
          if (train) state <= S_BWD;
          else       state <= S_DONE;
        end
        S_BWD: begin
          if (cnt == I1W'(NH)) begin
            state <= S_UPD2;
            cnt   <= '0;
            outer <= '0;
            inner <= '0;
            addr2 <= '0;
          end else cnt <= cnt + I1W'(1);
        end
        S_UPD2: if (c2_ready) begin
          addr2 <= addr2 + A2W'(1);
          if (inner == I1W'(NH)) begin
            inner <= '0;
            if (outer == I1W'(NO - 1)) begin
              outer <= '0;
              addr1 <= '0;
              state <= S_UPD1;
            end else outer <= outer + I1W'(1);
          end else inner <= inner + I1W'(1);
        end
        S_UPD1: if (c1_ready) begin
          addr1 <= addr1 + A1W'(1);
          if (inner == I1W'(NI)) begin
            inner <= '0;
            if (outer == I1W'(NH - 1)) begin
              outer <= '0;
              state <= S_DRAIN;
            end else outer <= outer + I1W'(1);
          end else inner <= inner + I1W'(1);
        end
        S_DRAIN: if (idle_all) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
