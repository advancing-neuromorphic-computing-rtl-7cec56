// conv_lif_layer: a convolutional layer of leaky integrate-and-fire neurons.
//
// Runs one time step per `start`. For every output neuron (channel oc, row oy,
// column ox) it loads the channel bias into the accumulator, adds
// weight[oc][ic][ky][kx] * in_spike[ic][oy+ky][ox+kx] over the IN_C x K x K window
// (one MUL/ACCU operation per clock), then passes the sum as input current to the
// LIF update and writes the output spike. Membrane potentials and refractory counters
// of all OUT_C x OH x OW neurons are held in an internal memory; with `t_first` high
// the stored state is ignored and every neuron starts from rest, which clears the
// layer for a new input. Stride 1 and no padding, so OH = IN_H-K+1, OW = IN_W-K+1.
//
// Interface: the layer fetches its input through `in_addr` (flat index
// ic*IN_H*IN_W + y*IN_W + x) and expects `in_spike` in the same cycle (a
// combinational read). Every output spike leaves through out_we/out_addr/out_ch/
// out_spike (flat index oc*OH*OW + oy*OW + ox). Weights (flat index
// oc*IN_C*K*K + ic*K*K + ky*K + kx) and biases are written through w_* and b_*
// while the layer is idle.
// Timing: `done` pulses OUT_C*OH*OW*(IN_C*K*K+2)+1 cycles after `start`.
// The convolution-plus-LIF structure and the MUL/ACCU/THRES chain follow the design
// description; the sequential single-MAC schedule, stride, padding and memory layout
// are this design's own choices.
module conv_lif_layer
  import snn_pkg::*;
#(
  parameter int IN_C  = 3,
  parameter int IN_H  = 32,
  parameter int IN_W  = 32,
  parameter int OUT_C = 4,
  parameter int K     = 3,
  // derived
  parameter int OH     = IN_H - K + 1,
  parameter int OW     = IN_W - K + 1,
  parameter int N_IN   = IN_C * IN_H * IN_W,
  parameter int N_OUT  = OUT_C * OH * OW,
  parameter int KK     = IN_C * K * K,
  parameter int IA_W   = $clog2(N_IN),
  parameter int OA_W   = $clog2(N_OUT),
  parameter int WA_W   = $clog2(OUT_C * KK),
  parameter int C_W    = (OUT_C > 1) ? $clog2(OUT_C) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  prec_e                  prec,
  input  lif_params_t            prm,
  input  logic                   start,
  input  logic                   t_first,
  output logic                   busy,
  output logic                   done,
  // input spike fetch
  output logic [IA_W-1:0]        in_addr,
  input  logic                   in_spike,
  // output spikes
  output logic                   out_we,
  output logic [OA_W-1:0]        out_addr,
  output logic [C_W-1:0]         out_ch,
  output logic                   out_spike,
  // parameter load
  input  logic                   w_we,
  input  logic [WA_W-1:0]        w_addr,
  input  logic signed [W_W-1:0]  w_data,
  input  logic                   b_we,
  input  logic [C_W-1:0]         b_addr,
  input  logic signed [B_W-1:0]  b_data
);

  typedef enum logic [1:0] {S_IDLE, S_BIAS, S_MAC, S_UPD} state_e;
  state_e state;

  logic signed [W_W-1:0]   wmem [OUT_C*KK];
  logic signed [B_W-1:0]   bmem [OUT_C];
  logic signed [V_W-1:0]   vmem [N_OUT];
  logic [REF_W-1:0]        rmem [N_OUT];

  logic [C_W-1:0]          oc;
  logic [$clog2(OH+1)-1:0] oy;
  logic [$clog2(OW+1)-1:0] ox;
  logic [$clog2(IN_C+1)-1:0] ic;
  logic [$clog2(K+1)-1:0]  ky, kx;
  logic [OA_W-1:0]         n;
  logic [WA_W-1:0]         widx;
  logic                    first_q;

  // MUL -> ACCU -> THRES
  logic signed [W_W+1:0]   product;
  logic signed [ACC_W-1:0] sum;
  logic signed [V_W-1:0]   v_old, v_new;
  logic [REF_W-1:0]        r_old, r_new;
  logic                    fire;
  logic                    last_k;

  assign in_addr = IA_W'(ic) * IA_W'(IN_H*IN_W) + (IA_W'(oy) + IA_W'(ky)) * IA_W'(IN_W)
                 + IA_W'(ox) + IA_W'(kx);

  syn_mul #(.ACT_W(2)) u_mul (
    .prec(prec), .act({1'b0, in_spike}), .weight(wmem[widx]), .product(product)
  );

  accu #(.IN_W(W_W+2)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .load(state == S_BIAS), .bias(bmem[oc]),
    .add(state == S_MAC), .addend(product),
    .sum(sum)
  );

  assign v_old = first_q ? prm.v_rest : vmem[n];
  assign r_old = first_q ? '0 : rmem[n];

  lif_thres u_thr (
    .prm(prm), .v_in(v_old), .ref_in(r_old), .current(sum),
    .v_out(v_new), .ref_out(r_new), .spike(fire)
  );

  assign last_k   = (int'(kx) == K-1) && (int'(ky) == K-1) && (int'(ic) == IN_C-1);
  assign busy     = (state != S_IDLE);
  assign out_we   = (state == S_UPD);
  assign out_addr = n;
  assign out_ch   = oc;
  assign out_spike = fire;

  // parameter memories: written only through the load ports
  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (b_we) bmem[b_addr] <= b_data;
  end

  // neuron state memory
  always_ff @(posedge clk) begin
    if (state == S_UPD) begin
      vmem[n] <= v_new;
      rmem[n] <= r_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      first_q <= 1'b0;
      oc <= '0; oy <= '0; ox <= '0; ic <= '0; ky <= '0; kx <= '0;
      n <= '0; widx <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          first_q <= t_first;
          oc <= '0; oy <= '0; ox <= '0; n <= '0; widx <= '0;
          state <= S_BIAS;
        end
        S_BIAS: begin
          ic <= '0; ky <= '0; kx <= '0;
          widx <= WA_W'(oc) * WA_W'(KK);
          state <= S_MAC;
        end
        S_MAC: begin
          widx <= widx + 1'b1;
          if (last_k) state <= S_UPD;
          if (int'(kx) == K-1) begin
            kx <= '0;
            if (int'(ky) == K-1) begin
              ky <= '0;
              ic <= ic + 1'b1;
            end else ky <= ky + 1'b1;
          end else kx <= kx + 1'b1;
        end
        S_UPD: begin
          n <= n + 1'b1;
          if (n == OA_W'(N_OUT-1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_BIAS;
            if (int'(ox) == OW-1) begin
              ox <= '0;
              if (int'(oy) == OH-1) begin
                oy <= '0;
                oc <= oc + 1'b1;
              end else oy <= oy + 1'b1;
            end else ox <= ox + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a new time step may only be started while the layer is idle
  assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("conv_lif_layer: start while busy");

endmodule
