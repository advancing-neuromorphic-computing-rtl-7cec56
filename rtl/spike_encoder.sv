// spike_encoder: turns an 8-bit pixel or sample into a spike train (Spiking Encoding).
//
// The network runs for T_STEPS time steps; at step t this block says whether the
// value x fires.
//   * Rate code: fires at step t when floor((t+1)*x/256) > floor(t*x/256), so over
//     T steps it fires floor(T*x/256) times, evenly spread.
//   * Latency code: fires once, at step floor((255-x)*T/256): brighter values fire
//     earlier; x = 0 never fires.
// Combinational. Rate and latency codes are the two input codes of the design
// description; the formulas are this design's own choice.
module spike_encoder
  import snn_pkg::*;
#(
  parameter int T_STEPS = 8,
  parameter int T_W     = (T_STEPS > 1) ? $clog2(T_STEPS) : 1
) (
  input  code_e             code,
  input  logic [PIX_W-1:0]  x,
  input  logic [T_W-1:0]    t,
  output logic              spike
);

  localparam int P_W = PIX_W + T_W + 1;

  logic [P_W-1:0] cur, prev, fire_t;

  always_comb begin
    cur    = (P_W'(t) + P_W'(1)) * P_W'(x);
    prev   = P_W'(t) * P_W'(x);
    fire_t = (P_W'(8'd255 - x) * P_W'(T_STEPS)) >> PIX_W;
    if (code == CODE_RATE) spike = (cur >> PIX_W) != (prev >> PIX_W);
    else                   spike = (x != '0) && (fire_t == P_W'(t));
  end

endmodule
