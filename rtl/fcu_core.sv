// fcu_core: the Fundamental Code Unit, a spiking image classifier (CIFAR-10 sized).
//
// An IMG_C x IMG_H x IMG_W image (8-bit pixels) sits in an input buffer. Each
// inference runs T_STEPS time steps. In every step the pixels are spike-encoded (rate
// or latency code). A first convolutional layer of LIF neurons turns them into a
// spike map of CONV_C x OH x OW bits. A second one turns that map into CONV2_C x OH2
// x OW2 bits. A linear layer over the flattened second map then adds its outputs to
// N_CLASSES running scores. After the last step the class with the largest score is
// the prediction. The three layers run one after the other, each on its own MAC.
//
// Interface: pix_* writes the input buffer (flat index c*IMG_H*IMG_W + y*IMG_W + x).
// cw_*/cb_* load the convolution weights and biases: addresses 0..N_CW1-1 and
// 0..CONV_C-1 are layer 1, the addresses after them layer 2 (each in the flat order
// of conv_lif_layer). lw_*/lb_* load the linear weights (flat index class*N_FLAT + i)
// and biases. All writes only while idle. `start` begins an inference; `done` pulses
// when `class_out` and `scores` are valid.
// Timing, from start to done:
//   T_STEPS * (CONV_C*OH*OW*(IMG_C*K*K+2) + CONV2_C*OH2*OW2*(CONV_C*K*K+2)
//              + N_CLASSES*(N_FLAT+2) + 6) + 2 cycles.
// Convolutional layers followed by LIF neurons, flattening and a linear classifier
// follow the design description. Two convolutional layers, the channel counts, the
// time steps and the score readout are this design's own choices; the image size
// and the ten classes are those of CIFAR-10.
module fcu_core
  import snn_pkg::*;
#(
  parameter int IMG_H     = 32,
  parameter int IMG_W     = 32,
  parameter int IMG_C     = 3,
  parameter int CONV_C    = 4,
  parameter int CONV2_C   = 4,
  parameter int K         = 3,
  parameter int N_CLASSES = 10,
  parameter int T_STEPS   = 8,
  parameter int SC_W      = 32,
  // derived
  parameter int OH     = IMG_H - K + 1,
  parameter int OW     = IMG_W - K + 1,
  parameter int OH2    = OH - K + 1,
  parameter int OW2    = OW - K + 1,
  parameter int N_PIX  = IMG_C * IMG_H * IMG_W,
  parameter int N_MAP1 = CONV_C * OH * OW,
  parameter int N_FLAT = CONV2_C * OH2 * OW2,
  parameter int N_CW1  = CONV_C * IMG_C * K * K,
  parameter int N_CW2  = CONV2_C * CONV_C * K * K,
  parameter int PA_W   = $clog2(N_PIX),
  parameter int CWA_W  = $clog2(N_CW1 + N_CW2),
  parameter int CBA_W  = $clog2(CONV_C + CONV2_C),
  parameter int LWA_W  = $clog2(N_FLAT * N_CLASSES),
  parameter int O_W    = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  parameter int T_W    = (T_STEPS > 1) ? $clog2(T_STEPS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  prec_e                  prec,
  input  code_e                  code,
  input  lif_params_t            prm,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [O_W-1:0]         class_out,
  output logic signed [SC_W-1:0] scores [N_CLASSES],
  input  logic                   pix_we,
  input  logic [PA_W-1:0]        pix_addr,
  input  logic [PIX_W-1:0]       pix_data,
  input  logic                   cw_we,
  input  logic [CWA_W-1:0]       cw_addr,
  input  logic signed [W_W-1:0]  cw_data,
  input  logic                   cb_we,
  input  logic [CBA_W-1:0]       cb_addr,
  input  logic signed [B_W-1:0]  cb_data,
  input  logic                   lw_we,
  input  logic [LWA_W-1:0]       lw_addr,
  input  logic signed [W_W-1:0]  lw_data,
  input  logic                   lb_we,
  input  logic [O_W-1:0]         lb_addr,
  input  logic signed [B_W-1:0]  lb_data
);

  localparam int C1_W = (CONV_C > 1) ? $clog2(CONV_C) : 1;
  localparam int C2_W = (CONV2_C > 1) ? $clog2(CONV2_C) : 1;

  typedef enum logic [2:0] {
    S_IDLE, S_CONV, S_CWAIT, S_CONV2, S_C2WAIT, S_LIN, S_LWAIT, S_CLASS
  } state_e;
  state_e state;

  logic [PIX_W-1:0] pix   [N_PIX];
  logic             smap1 [N_MAP1];  // layer-1 spike map of the current time step
  logic             smap  [N_FLAT];  // layer-2 spike map of the current time step
  logic [T_W-1:0]   t;

  logic                       conv_busy, conv_done, conv2_busy, conv2_done;
  logic                       lin_busy, lin_done;
  logic [PA_W-1:0]            c_in_addr;
  logic                       c_in_spike;
  logic                       out_we, out_spike, out2_we, out2_spike;
  logic [$clog2(N_MAP1)-1:0]  out_addr, c2_in_addr;
  logic [$clog2(N_FLAT)-1:0]  out2_addr, l_in_addr;
  logic [C1_W-1:0]            out_ch;
  logic [C2_W-1:0]            out2_ch;
  logic [O_W-1:0]             winner;

  // weight and bias writes are split between the two layers by address
  logic cw1_we, cw2_we, cb1_we, cb2_we;
  logic [CWA_W-1:0] cw2_addr;
  logic [CBA_W-1:0] cb2_addr;
  assign cw1_we   = cw_we && (int'(cw_addr) < N_CW1);
  assign cw2_we   = cw_we && (int'(cw_addr) >= N_CW1);
  assign cw2_addr = cw_addr - CWA_W'(N_CW1);
  assign cb1_we   = cb_we && (int'(cb_addr) < CONV_C);
  assign cb2_we   = cb_we && (int'(cb_addr) >= CONV_C);
  assign cb2_addr = cb_addr - CBA_W'(CONV_C);

  always_ff @(posedge clk) begin
    if (pix_we)  pix[pix_addr]    <= pix_data;
    if (out_we)  smap1[out_addr]  <= out_spike;
    if (out2_we) smap[out2_addr]  <= out2_spike;
  end

  spike_encoder #(.T_STEPS(T_STEPS)) u_enc (
    .code(code), .x(pix[c_in_addr]), .t(t), .spike(c_in_spike)
  );

  conv_lif_layer #(
    .IN_C(IMG_C), .IN_H(IMG_H), .IN_W(IMG_W), .OUT_C(CONV_C), .K(K)
  ) u_conv (
    .clk(clk), .rst_n(rst_n), .prec(prec), .prm(prm),
    .start(state == S_CONV), .t_first(t == '0), .busy(conv_busy), .done(conv_done),
    .in_addr(c_in_addr), .in_spike(c_in_spike),
    .out_we(out_we), .out_addr(out_addr), .out_ch(out_ch), .out_spike(out_spike),
    .w_we(cw1_we), .w_addr(cw_addr[$clog2(N_CW1)-1:0]), .w_data(cw_data),
    .b_we(cb1_we), .b_addr(cb_addr[C1_W-1:0]), .b_data(cb_data)
  );

  conv_lif_layer #(
    .IN_C(CONV_C), .IN_H(OH), .IN_W(OW), .OUT_C(CONV2_C), .K(K)
  ) u_conv2 (
    .clk(clk), .rst_n(rst_n), .prec(prec), .prm(prm),
    .start(state == S_CONV2), .t_first(t == '0), .busy(conv2_busy), .done(conv2_done),
    .in_addr(c2_in_addr), .in_spike(smap1[c2_in_addr]),
    .out_we(out2_we), .out_addr(out2_addr), .out_ch(out2_ch), .out_spike(out2_spike),
    .w_we(cw2_we), .w_addr(cw2_addr[$clog2(N_CW2)-1:0]), .w_data(cw_data),
    .b_we(cb2_we), .b_addr(cb2_addr[C2_W-1:0]), .b_data(cb_data)
  );

  linear_layer #(.N_IN(N_FLAT), .N_OUT(N_CLASSES), .SC_W(SC_W)) u_lin (
    .clk(clk), .rst_n(rst_n), .prec(prec),
    .start(state == S_LIN), .t_first(t == '0), .busy(lin_busy), .done(lin_done),
    .in_addr(l_in_addr), .in_spike(smap[l_in_addr]), .scores(scores),
    .w_we(lw_we), .w_addr(lw_addr), .w_data(lw_data),
    .b_we(lb_we), .b_addr(lb_addr), .b_data(lb_data)
  );

  argmax #(.N(N_CLASSES), .W(SC_W)) u_arg (.vals(scores), .idx(winner));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      t         <= '0;
      class_out <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) begin
          t     <= '0;
          state <= S_CONV;
        end
        S_CONV:  state <= S_CWAIT;
        S_CWAIT: if (conv_done) state <= S_CONV2;
        S_CONV2: state <= S_C2WAIT;
        S_C2WAIT: if (conv2_done) state <= S_LIN;
        S_LIN:   state <= S_LWAIT;
        S_LWAIT: if (lin_done) begin
          if (t == T_W'(T_STEPS-1)) state <= S_CLASS;
          else begin
            t     <= t + 1'b1;
            state <= S_CONV;
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

  assert property (@(posedge clk) disable iff (!rst_n)
                   (pix_we || cw_we || cb_we || lw_we || lb_we) |-> !busy)
    else $error("fcu_core: parameter or pixel write during an inference");

endmodule
