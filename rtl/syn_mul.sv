// syn_mul: the MUL stage of the neuron datapath (synapse multiplier).
//
// Multiplies a signed input activation by a synaptic weight used at one of four
// precisions: binary (the weight's sign gives +1 or -1), INT2 (the two low bits,
// signed), INT4 (the four low bits, signed) or INT8 (the full weight). In the spiking
// layers the activation is a spike, 0 or 1, so the product is the weight or zero.
// Purely combinational: the product is valid in the same cycle as the operands.
// The MUL block and the precision set come from the design description; the way a
// weight is cut down to a lower precision (low bits, sign-extended) is this design's
// own choice.
module syn_mul
  import snn_pkg::*;
#(
  parameter int ACT_W = 2   // activation width (signed)
) (
  input  prec_e                         prec,
  input  logic signed [ACT_W-1:0]       act,
  input  logic signed [W_W-1:0]         weight,
  output logic signed [ACT_W+W_W-1:0]   product
);

  logic signed [W_W-1:0] w_eff;

  always_comb begin
    unique case (prec)
      PREC_BIN:  w_eff = weight[W_W-1] ? -8'sd1 : 8'sd1;
      PREC_INT2: w_eff = W_W'(signed'(weight[1:0]));
      PREC_INT4: w_eff = W_W'(signed'(weight[3:0]));
      default:   w_eff = weight;
    endcase
  end

  assign product = (ACT_W+W_W)'(act) * (ACT_W+W_W)'(w_eff);

endmodule
