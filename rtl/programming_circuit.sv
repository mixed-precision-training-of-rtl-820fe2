// programming_circuit: delivers p programming pulses to one device.
//
// A request names a device (linear synapse address) and a signed pulse count
// p. The circuit emits |p| pulses of identical shape, potentiating for p > 0
// and depressing for p < 0, without reading the device back (blind
// single-pulse programming). Each pulse is PULSE_W cycles high followed by
// GAP_W cycles low; both are this design's choice. While pulses are being
// delivered the circuit is not ready, which stalls the update stream.
//
// Handshake: a request is taken on a cycle with req_valid && req_ready.
// Requests with p == 0 are accepted and produce no pulse.
module programming_circuit
  import mp_pkg::*;
#(
  parameter int unsigned AW      = 18,
  parameter int unsigned PW      = P_W,
  parameter int unsigned PULSE_W = 1,
  parameter int unsigned GAP_W   = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [AW-1:0]        req_addr,
  input  logic signed [PW-1:0] req_p,
  output logic                 pulse,      // programming pulse to the array
  output logic                 pulse_pot,  // 1: potentiate, 0: depress
  output logic [AW-1:0]        pulse_addr,
  output logic [31:0]          n_pulses    // pulses delivered since reset
);
  localparam int unsigned TW = $clog2(PULSE_W + GAP_W + 1) + 1;
  logic [PW-1:0] left;
  logic [TW-1:0] t;
  logic          busy;

  assign req_ready = !busy;
  assign pulse     = busy && (t < TW'(PULSE_W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      left       <= '0;
      t          <= '0;
      pulse_pot  <= 1'b0;
      pulse_addr <= '0;
      n_pulses   <= '0;
    end else if (!busy) begin
      if (req_valid && req_p != '0) begin
        busy       <= 1'b1;
        left       <= req_p[PW-1] ? PW'(-req_p) : PW'(req_p);
        t          <= '0;
        pulse_pot  <= !req_p[PW-1];
        pulse_addr <= req_addr;
      end
    end else begin
      if (t == TW'(0)) n_pulses <= n_pulses + 32'd1;
      if (t == TW'(PULSE_W + GAP_W - 1)) begin
        t <= '0;
        if (left == PW'(1)) busy <= 1'b0;
        left <= left - PW'(1);
      end else begin
        t <= t + TW'(1);
      end
    end
  end

  // Pulse polarity and address stay fixed while a request is served.
  property p_stable;
    @(posedge clk) disable iff (!rst_n) (busy && $past(busy)) |-> $stable(pulse_addr) && $stable(pulse_pot);
  endproperty
  assert property (p_stable);
endmodule
