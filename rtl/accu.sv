// accu: the ACCU stage of the neuron datapath.
//
// Holds the running sum of one neuron's input. `load` starts a new sum at the
// neuron's bias; each cycle with `add` high adds `addend` (a product from syn_mul).
// Additions saturate at the limits of the ACC_W-bit signed range instead of wrapping.
// `load` wins over `add`. The sum is registered: it shows the effect of a load or an
// add one clock later. Reset clears the sum. The ACCU block and its bias input come
// from the design description; width and saturation are this design's own choice.
module accu
  import snn_pkg::*;
#(
  parameter int IN_W = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic signed [B_W-1:0]    bias,
  input  logic                     add,
  input  logic signed [IN_W-1:0]   addend,
  output logic signed [ACC_W-1:0]  sum
);

  localparam logic signed [ACC_W-1:0] MAXV = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] MINV = {1'b1, {(ACC_W-1){1'b0}}};

  logic signed [ACC_W:0] next_wide;

  assign next_wide = (ACC_W+1)'(sum) + (ACC_W+1)'(addend);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum <= '0;
    end else if (load) begin
      sum <= ACC_W'(bias);
    end else if (add) begin
      if (next_wide > (ACC_W+1)'(MAXV))      sum <= MAXV;
      else if (next_wide < (ACC_W+1)'(MINV)) sum <= MINV;
      else                                   sum <= next_wide[ACC_W-1:0];
    end
  end

endmodule
