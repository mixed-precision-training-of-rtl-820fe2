// chi_accumulator: high-precision accumulation of weight updates, one chi
// word per synapse, and conversion of the accumulated value into device
// programming requests.
//
// For each incoming update (synapse address, dW) the unit reads chi,
// forms chi + dW (saturating), lets pulse_quantizer take p = trunc(chi/eps)
// and writes chi - p*eps back. When p is non-zero a programming request
// (address, p) is raised and held until the programming circuit takes it;
// the unit accepts no new update meanwhile (stall). The device is never read.
//
// chi memory: DEPTH words of CW bits, a single-port array with registered
// read (one read or one write per cycle). After reset, and on `clear`, the
// unit sweeps the memory to zero, one word per cycle, and is not ready until
// the sweep ends: chi starts at zero as the scheme requires.
//
// Timing: an update is taken on in_valid && in_ready (state IDLE), chi is
// read in that cycle, the new value is written in the next (state UPD); so
// the unit takes at most one update every two cycles, more when stalled.
module chi_accumulator
  import mp_pkg::*;
#(
  parameter int unsigned DEPTH = (N_IN + 1) * N_HID,
  parameter int unsigned CW    = CHI_W,
  parameter int unsigned PW    = P_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [CW-1:0]        eps_p,
  input  logic [CW-1:0]        eps_d,
  // update stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [AW-1:0]        in_addr,
  input  logic signed [CW-1:0] in_dw,
  // programming requests
  output logic                 prog_valid,
  input  logic                 prog_ready,
  output logic [AW-1:0]        prog_addr,
  output logic signed [PW-1:0] prog_p,
  // statistics
  output logic [31:0]          n_updates,  // requests with p != 0
  output logic [31:0]          n_stalls,   // cycles a request waited
  output logic [31:0]          n_sat       // quantisations that hit P_MAX
);
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_UPD, S_PROG} state_t;
  state_t state;

  logic signed [CW-1:0] mem [DEPTH];
  logic signed [CW-1:0] rd_q;
  logic [AW-1:0]        addr_q;
  logic signed [CW-1:0] dw_q;
  logic [AW-1:0]        clr_addr;

  logic signed [CW:0]   sum_w;
  logic signed [CW-1:0] sum;
  logic signed [PW-1:0] p;
  logic signed [CW-1:0] chi_res;
  logic                 qsat;

  localparam logic signed [CW:0] MAXV = (CW+1)'({1'b0, {(CW-1){1'b1}}});
  localparam logic signed [CW:0] MINV = -MAXV - 1;

  always_comb begin
    sum_w = (CW+1)'(rd_q) + (CW+1)'(dw_q);
    if (sum_w > MAXV)      sum = CW'(MAXV);
    else if (sum_w < MINV) sum = CW'(MINV);
    else                   sum = CW'(sum_w);
  end

  pulse_quantizer #(.CW(CW), .PW(PW)) u_q (
    .chi(sum), .eps_p(eps_p), .eps_d(eps_d), .p(p), .chi_res(chi_res), .sat(qsat)
  );

  assign in_ready   = (state == S_IDLE) && !clear;
  assign prog_valid = (state == S_PROG);

  // Memory port: write in S_CLEAR and S_UPD, read on an accepted update.
  always_ff @(posedge clk) begin
    if (state == S_CLEAR)
      mem[clr_addr] <= '0;
    else if (state == S_UPD)
      mem[addr_q] <= chi_res;
    else if (in_valid && in_ready)
      rd_q <= mem[in_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      clr_addr  <= '0;
      addr_q    <= '0;
      dw_q      <= '0;
      prog_addr <= '0;
      prog_p    <= '0;
      n_updates <= '0;
      n_stalls  <= '0;
      n_sat     <= '0;
    end else begin
      unique case (state)
        S_CLEAR: begin
          clr_addr <= clr_addr + AW'(1);
          if (clr_addr == AW'(DEPTH - 1)) begin
            clr_addr <= '0;
            state    <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (clear) begin
            clr_addr <= '0;
            state    <= S_CLEAR;
          end else if (in_valid) begin
            addr_q <= in_addr;
            dw_q   <= in_dw;
            state  <= S_UPD;
          end
        end
        S_UPD: begin
          if (qsat) n_sat <= n_sat + 32'd1;
          if (p != '0) begin
            prog_addr <= addr_q;
            prog_p    <= p;
            n_updates <= n_updates + 32'd1;
            state     <= S_PROG;
          end else begin
            state <= S_IDLE;
          end
        end
        S_PROG: begin
          if (prog_ready) state <= S_IDLE;
          else            n_stalls <= n_stalls + 32'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A programming request stays unchanged until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (prog_valid && !prog_ready) |=> (prog_valid && $stable(prog_addr) && $stable(prog_p));
  endproperty
  assert property (p_hold);
endmodule
