// lif_thres: the THRES stage, one leaky integrate-and-fire (LIF) update.
//
// Given a neuron's stored state (membrane potential v and refractory counter) and
// the summed input current of this time step, computes the next state and whether
// the neuron fires:
//   * refractory (counter > 0): the input is ignored, v stays at v_rest, counter - 1;
//   * otherwise v' = v - ((v - v_rest) >>> leak_shift) + current, saturated to V_W
//     bits (leak_shift = 0 disables the leak);
//   * if v' >= v_th the neuron spikes, v is reset to v_rest and the counter is
//     loaded with t_ref.
// Purely combinational; the caller stores the state. Leak toward rest, threshold,
// reset to rest and a refractory time are the neuron behaviour of the design
// description; the shift-based leak and the widths are this design's own choice.
module lif_thres
  import snn_pkg::*;
(
  input  lif_params_t               prm,
  input  logic signed [V_W-1:0]     v_in,
  input  logic [REF_W-1:0]          ref_in,
  input  logic signed [ACC_W-1:0]   current,
  output logic signed [V_W-1:0]     v_out,
  output logic [REF_W-1:0]          ref_out,
  output logic                      spike
);

  localparam int WW = ACC_W + 2;
  localparam logic signed [WW-1:0] VMAX = WW'({1'b0, {(V_W-1){1'b1}}});
  localparam logic signed [WW-1:0] VMIN = -WW'({1'b0, {(V_W-1){1'b1}}}) - WW'(1);

  logic signed [WW-1:0] diff, leak, v_int;
  logic signed [V_W-1:0] v_sat;

  always_comb begin
    diff  = WW'(v_in) - WW'(prm.v_rest);
    if (prm.leak_shift == 4'd0) leak = '0;
    else                        leak = diff >>> prm.leak_shift;
    v_int = WW'(v_in) - leak + WW'(current);
    if (v_int > VMAX)      v_sat = VMAX[V_W-1:0];
    else if (v_int < VMIN) v_sat = VMIN[V_W-1:0];
    else                   v_sat = v_int[V_W-1:0];

    if (ref_in != '0) begin
      v_out   = prm.v_rest;
      ref_out = ref_in - 1'b1;
      spike   = 1'b0;
    end else if (v_sat >= prm.v_th) begin
      v_out   = prm.v_rest;
      ref_out = prm.t_ref;
      spike   = 1'b1;
    end else begin
      v_out   = v_sat;
      ref_out = '0;
      spike   = 1'b0;
    end
  end

endmodule
