// argmax: index of the largest of N signed values; on a tie the lowest index wins.
// Combinational linear scan. Used by the BCU and FCU to turn spike counts or class
// scores into the predicted class.
module argmax #(
  parameter int N   = 10,
  parameter int W   = 32,
  parameter int I_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [W-1:0] vals [N],
  output logic [I_W-1:0]      idx
);

  logic signed [W-1:0] best;

  always_comb begin
    best = vals[0];
    idx  = '0;
    for (int k = 1; k < N; k++) begin
      if (vals[k] > best) begin
        best = vals[k];
        idx  = I_W'(k);
      end
    end
  end

endmodule
