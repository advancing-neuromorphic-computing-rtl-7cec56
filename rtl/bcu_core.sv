// bcu_core: the Brain Code Unit, a spiking classifier for brain MRI images.
//
// A one-channel image (IMG_H x IMG_W pixels, 8 bits) sits in an input buffer. Each
// inference runs T_STEPS time steps. In every step the pixels are turned into spikes
// by the spike encoder (rate or latency code) and fed to a convolutional layer of LIF
// neurons with CONV_C output channels. The output spikes of each channel are counted
// over all steps; the channel with the most spikes is the predicted class, so with
// CONV_C = 2 the two channels vote for "no tumour" (0) and "tumour" (1).
//
// Interface: pix_* writes the input buffer (flat index y*IMG_W + x), w_*/b_* load the
// convolution weights and biases; all three only while idle. `start` begins an
// inference; `done` pulses when `class_out` and `spike_cnt` are valid; they hold
// until the next start.
// Timing: T_STEPS * (CONV_C*OH*OW*(K*K*IMG_C+2) + 2) + 2 cycles from start to done.
// The convolution + LIF structure and the binary label follow the design
// description; image size, channel count, time steps and the spike-count readout are
// this design's own choices (no size is given).
module bcu_core
  import snn_pkg::*;
#(
  parameter int IMG_H   = 32,
  parameter int IMG_W   = 32,
  parameter int IMG_C   = 1,
  parameter int CONV_C  = 2,
  parameter int K       = 3,
  parameter int T_STEPS = 8,
  // derived
  parameter int OH    = IMG_H - K + 1,
  parameter int OW    = IMG_W - K + 1,
  parameter int N_PIX = IMG_C * IMG_H * IMG_W,
  parameter int PA_W  = $clog2(N_PIX),
  parameter int WA_W  = $clog2(CONV_C * IMG_C * K * K),
  parameter int C_W   = (CONV_C > 1) ? $clog2(CONV_C) : 1,
  parameter int T_W   = (T_STEPS > 1) ? $clog2(T_STEPS) : 1,
  parameter int CNT_W = $clog2(T_STEPS * OH * OW + 1) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  prec_e                  prec,
  input  code_e                  code,
  input  lif_params_t            prm,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [C_W-1:0]         class_out,
  output logic signed [CNT_W-1:0] spike_cnt [CONV_C],
  input  logic                   pix_we,
  input  logic [PA_W-1:0]        pix_addr,
  input  logic [PIX_W-1:0]       pix_data,
  input  logic                   w_we,
  input  logic [WA_W-1:0]        w_addr,
  input  logic signed [W_W-1:0]  w_data,
  input  logic                   b_we,
  input  logic [C_W-1:0]         b_addr,
  input  logic signed [B_W-1:0]  b_data
);

  typedef enum logic [1:0] {S_IDLE, S_STEP, S_WAIT, S_CLASS} state_e;
  state_e state;

  logic [PIX_W-1:0] pix [N_PIX];
  logic [T_W-1:0]   t;

  logic                conv_start, conv_busy, conv_done;
  logic [PA_W-1:0]     in_addr;
  logic                in_spike;
  logic                out_we, out_spike;
  logic [$clog2(CONV_C*OH*OW)-1:0] out_addr;
  logic [C_W-1:0]      out_ch;
  logic [C_W-1:0]      winner;

  always_ff @(posedge clk) if (pix_we) pix[pix_addr] <= pix_data;

  spike_encoder #(.T_STEPS(T_STEPS)) u_enc (
    .code(code), .x(pix[in_addr]), .t(t), .spike(in_spike)
  );

  assign conv_start = (state == S_STEP);

  conv_lif_layer #(
    .IN_C(IMG_C), .IN_H(IMG_H), .IN_W(IMG_W), .OUT_C(CONV_C), .K(K)
  ) u_conv (
    .clk(clk), .rst_n(rst_n), .prec(prec), .prm(prm),
    .start(conv_start), .t_first(t == '0), .busy(conv_busy), .done(conv_done),
    .in_addr(in_addr), .in_spike(in_spike),
    .out_we(out_we), .out_addr(out_addr), .out_ch(out_ch), .out_spike(out_spike),
    .w_we(w_we), .w_addr(w_addr), .w_data(w_data),
    .b_we(b_we), .b_addr(b_addr), .b_data(b_data)
  );

  argmax #(.N(CONV_C), .W(CNT_W)) u_arg (.vals(spike_cnt), .idx(winner));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      t         <= '0;
      class_out <= '0;
      for (int c = 0; c < CONV_C; c++) spike_cnt[c] <= '0;
    end else begin
      done <= 1'b0;
      if (out_we && out_spike) spike_cnt[out_ch] <= spike_cnt[out_ch] + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          t <= '0;
          for (int c = 0; c < CONV_C; c++) spike_cnt[c] <= '0;
          state <= S_STEP;
        end
        S_STEP: state <= S_WAIT;
        S_WAIT: if (conv_done) begin
          if (t == T_W'(T_STEPS-1)) state <= S_CLASS;
          else begin
            t     <= t + 1'b1;
            state <= S_STEP;
          end
        end
        S_CLASS: begin
          class_out <= winner;
          done      <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (pix_we || w_we || b_we) |-> !busy)
    else $error("bcu_core: parameter or pixel write during an inference");

endmodule
