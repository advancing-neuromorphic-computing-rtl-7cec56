// linear_layer: the fully connected classifier on the flattened spike map.
//
// Runs one time step per `start`. For each output o it loads bias[o] into the
// accumulator, adds weight[o][i] * in_spike[i] for i = 0..N_IN-1 (one MUL/ACCU
// operation per clock) and adds the sum to the running score of class o. With
// `t_first` high the scores restart from this step's sums, so after T time steps a
// score is the sum over time of the layer's output; the largest score is the class.
// Scores saturate at the SC_W-bit signed range.
//
// Interface: input spikes are fetched through `in_addr` with `in_spike` returned in
// the same cycle. Weights (flat index o*N_IN + i) and biases load through w_*/b_*
// while idle. `scores` holds all N_OUT running scores.
// Timing: `done` pulses N_OUT*(N_IN+2)+1 cycles after `start`.
// A linear layer after the flattened LIF output follows the design description;
// summing its output over the time steps is this design's own choice.
module linear_layer
  import snn_pkg::*;
#(
  parameter int N_IN  = 3136,
  parameter int N_OUT = 10,
  parameter int SC_W  = 32,
  // derived
  parameter int IA_W  = $clog2(N_IN),
  parameter int WA_W  = $clog2(N_IN * N_OUT),
  parameter int O_W   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  prec_e                        prec,
  input  logic                         start,
  input  logic                         t_first,
  output logic                         busy,
  output logic                         done,
  output logic [IA_W-1:0]              in_addr,
  input  logic                         in_spike,
  output logic signed [SC_W-1:0]       scores [N_OUT],
  input  logic                         w_we,
  input  logic [WA_W-1:0]              w_addr,
  input  logic signed [W_W-1:0]        w_data,
  input  logic                         b_we,
  input  logic [O_W-1:0]               b_addr,
  input  logic signed [B_W-1:0]        b_data
);

  typedef enum logic [1:0] {S_IDLE, S_BIAS, S_MAC, S_UPD} state_e;
  state_e state;

  logic signed [W_W-1:0]   wmem [N_IN*N_OUT];
  logic signed [B_W-1:0]   bmem [N_OUT];

  logic [O_W-1:0]          o;
  logic [IA_W-1:0]         i;
  logic [WA_W-1:0]         widx;
  logic                    first_q;

  logic signed [W_W+1:0]   product;
  logic signed [ACC_W-1:0] sum;
  logic signed [SC_W:0]    sc_next;

  localparam logic signed [SC_W-1:0] SMAX = {1'b0, {(SC_W-1){1'b1}}};
  localparam logic signed [SC_W-1:0] SMIN = {1'b1, {(SC_W-1){1'b0}}};

  assign in_addr = i;
  assign busy    = (state != S_IDLE);

  syn_mul #(.ACT_W(2)) u_mul (
    .prec(prec), .act({1'b0, in_spike}), .weight(wmem[widx]), .product(product)
  );

  accu #(.IN_W(W_W+2)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .load(state == S_BIAS), .bias(bmem[o]),
    .add(state == S_MAC), .addend(product),
    .sum(sum)
  );

  assign sc_next = first_q ? (SC_W+1)'(sum) : (SC_W+1)'(scores[o]) + (SC_W+1)'(sum);

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (b_we) bmem[b_addr] <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      first_q <= 1'b0;
      o <= '0; i <= '0; widx <= '0;
      for (int k = 0; k < N_OUT; k++) scores[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          first_q <= t_first;
          o <= '0; widx <= '0;
          state <= S_BIAS;
        end
        S_BIAS: begin
          i <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          widx <= widx + 1'b1;
          i    <= i + 1'b1;
          if (i == IA_W'(N_IN-1)) state <= S_UPD;
        end
        S_UPD: begin
          if (sc_next > (SC_W+1)'(SMAX))      scores[o] <= SMAX;
          else if (sc_next < (SC_W+1)'(SMIN)) scores[o] <= SMIN;
          else                                scores[o] <= sc_next[SC_W-1:0];
          o <= o + 1'b1;
          if (o == O_W'(N_OUT-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_BIAS;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("linear_layer: start while busy");

endmodule
