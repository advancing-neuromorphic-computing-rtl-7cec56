// neuro_top: the neuromorphic processor with its mixed-signal interface.
//
// Signal chain: sensor -> SPI ADC -> input buffer -> spiking core (BCU or FCU) ->
// decision -> SPI DAC. The chip holds two spiking cores:
//   * bcu_core, the Brain Code Unit: convolution + LIF, two classes (MRI, tumour or
//     not), decided by per-channel spike counts;
//   * fcu_core, the Fundamental Code Unit: two convolution + LIF layers and a linear
//     layer, ten classes (CIFAR-10 sized images), decided by accumulated class scores.
//     Its second layer's weights and biases follow the first layer's in the
//     CFG_FCU_CONV_W / CFG_FCU_CONV_B address spaces.
// One inference: on `start` the unit chosen by `unit` gets its input image, either
// already written through the configuration bus (use_adc = 0) or read now from the
// ADC, one SPI frame per pixel (use_adc = 1); the core then runs T_STEPS time steps;
// the predicted class is sent to the DAC in one SPI frame {DAC_CMD, class} and
// `done` pulses with `class_out` valid.
//
// Configuration bus (only while idle): cfg_sel picks the target (snn_pkg::cfg_sel_e:
// pixels, convolution weights/biases of either core, linear weights/biases of the
// FCU), cfg_addr the flat index inside it, cfg_data the value (low 8 bits for pixels
// and weights, 16 bits for biases). prec, code and prm (weight precision, spike code,
// LIF threshold parameters) are shared by both cores and must be stable during a run.
// The two cores, the SPI-connected ADC and DAC and the neuron datapath follow the
// design description; the sharing of one control flow, the bus and all sizes are
// this design's own choices.
module neuro_top
  import snn_pkg::*;
#(
  parameter int BCU_IMG   = 32,
  parameter int BCU_C     = 2,
  parameter int FCU_IMG   = 32,
  parameter int FCU_IMG_C = 3,
  parameter int FCU_C     = 4,
  parameter int FCU_C2    = 4,
  parameter int N_CLASSES = 10,
  parameter int K         = 3,
  parameter int T_STEPS   = 8,
  parameter int SC_W      = 32,
  parameter int ADC_BITS  = 12,
  parameter int SPI_W     = 16,
  parameter int SPI_DIV   = 4,
  parameter logic [3:0] DAC_CMD = 4'h0,
  parameter int CFG_A_W   = 17,
  // derived
  parameter int BCU_OH    = BCU_IMG - K + 1,
  parameter int FCU_OH2   = FCU_IMG - 2 * (K - 1),
  parameter int BCU_CNT_W = $clog2(T_STEPS * BCU_OH * BCU_OH + 1) + 1,
  parameter int N_BPIX    = BCU_IMG * BCU_IMG,
  parameter int N_FPIX    = FCU_IMG_C * FCU_IMG * FCU_IMG,
  parameter int N_MAXPIX  = (N_BPIX > N_FPIX) ? N_BPIX : N_FPIX,
  parameter int A_W       = $clog2(N_MAXPIX + 1),
  parameter int CL_W      = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  parameter int BCL_W     = (BCU_C > 1) ? $clog2(BCU_C) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  unit_e                       unit,
  input  logic                        use_adc,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [CL_W-1:0]             class_out,
  output logic signed [BCU_CNT_W-1:0] bcu_spike_cnt [BCU_C],
  output logic signed [SC_W-1:0]      fcu_scores [N_CLASSES],
  input  prec_e                       prec,
  input  code_e                       code,
  input  lif_params_t                 prm,
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  logic [CFG_A_W-1:0]          cfg_addr,
  input  logic [15:0]                 cfg_data,
  output logic                        adc_sclk,
  output logic                        adc_cs_n,
  output logic                        adc_mosi,
  input  logic                        adc_miso,
  output logic                        dac_sclk,
  output logic                        dac_cs_n,
  output logic                        dac_mosi
);

  typedef enum logic [2:0] {S_IDLE, S_ACQ, S_RUN, S_CWAIT, S_DAC, S_DWAIT} state_e;
  state_e state;
  unit_e  unit_q;

  // ADC acquisition
  logic             acq_busy, acq_done, acq_we;
  logic [A_W-1:0]   acq_addr;
  logic [PIX_W-1:0] acq_data;

  adc_reader #(
    .N_MAX(N_MAXPIX), .ADC_BITS(ADC_BITS), .DATA_W(SPI_W), .CLK_DIV(SPI_DIV)
  ) u_adc (
    .clk(clk), .rst_n(rst_n), .start(state == S_IDLE && start && use_adc),
    .n_samples(unit == UNIT_BCU ? A_W'(N_BPIX) : A_W'(N_FPIX)),
    .busy(acq_busy), .done(acq_done),
    .wr_en(acq_we), .wr_addr(acq_addr), .wr_data(acq_data),
    .sclk(adc_sclk), .cs_n(adc_cs_n), .mosi(adc_mosi), .miso(adc_miso)
  );

  // pixel write: ADC during acquisition, configuration bus otherwise
  logic             bpix_we, fpix_we;
  logic [A_W-1:0]   pix_addr;
  logic [PIX_W-1:0] pix_data;

  always_comb begin
    if (state == S_ACQ) begin
      bpix_we  = acq_we && (unit_q == UNIT_BCU);
      fpix_we  = acq_we && (unit_q == UNIT_FCU);
      pix_addr = acq_addr;
      pix_data = acq_data;
    end else begin
      bpix_we  = cfg_we && (cfg_sel == CFG_BCU_PIX);
      fpix_we  = cfg_we && (cfg_sel == CFG_FCU_PIX);
      pix_addr = A_W'(cfg_addr);
      pix_data = cfg_data[PIX_W-1:0];
    end
  end

  // cores
  logic             bcu_busy, bcu_done, fcu_busy, fcu_done;
  logic [BCL_W-1:0] bcu_class;
  logic [CL_W-1:0]  fcu_class;

  bcu_core #(
    .IMG_H(BCU_IMG), .IMG_W(BCU_IMG), .IMG_C(1), .CONV_C(BCU_C), .K(K), .T_STEPS(T_STEPS)
  ) u_bcu (
    .clk(clk), .rst_n(rst_n), .prec(prec), .code(code), .prm(prm),
    .start(state == S_RUN && unit_q == UNIT_BCU), .busy(bcu_busy), .done(bcu_done),
    .class_out(bcu_class), .spike_cnt(bcu_spike_cnt),
    .pix_we(bpix_we), .pix_addr(pix_addr[$clog2(N_BPIX)-1:0]), .pix_data(pix_data),
    .w_we(cfg_we && cfg_sel == CFG_BCU_CONV_W), .w_addr(cfg_addr[$clog2(BCU_C*K*K)-1:0]),
    .w_data(cfg_data[W_W-1:0]),
    .b_we(cfg_we && cfg_sel == CFG_BCU_CONV_B), .b_addr(cfg_addr[BCL_W-1:0]),
    .b_data(cfg_data)
  );

  fcu_core #(
    .IMG_H(FCU_IMG), .IMG_W(FCU_IMG), .IMG_C(FCU_IMG_C), .CONV_C(FCU_C), .CONV2_C(FCU_C2),
    .K(K),
    .N_CLASSES(N_CLASSES), .T_STEPS(T_STEPS), .SC_W(SC_W)
  ) u_fcu (
    .clk(clk), .rst_n(rst_n), .prec(prec), .code(code), .prm(prm),
    .start(state == S_RUN && unit_q == UNIT_FCU), .busy(fcu_busy), .done(fcu_done),
    .class_out(fcu_class), .scores(fcu_scores),
    .pix_we(fpix_we), .pix_addr(pix_addr[$clog2(N_FPIX)-1:0]), .pix_data(pix_data),
    .cw_we(cfg_we && cfg_sel == CFG_FCU_CONV_W),
    .cw_addr(cfg_addr[$clog2(FCU_C*FCU_IMG_C*K*K + FCU_C2*FCU_C*K*K)-1:0]),
    .cw_data(cfg_data[W_W-1:0]),
    .cb_we(cfg_we && cfg_sel == CFG_FCU_CONV_B),
    .cb_addr(cfg_addr[$clog2(FCU_C+FCU_C2)-1:0]), .cb_data(cfg_data),
    .lw_we(cfg_we && cfg_sel == CFG_FCU_LIN_W),
    .lw_addr(cfg_addr[$clog2(FCU_C2*FCU_OH2*FCU_OH2*N_CLASSES)-1:0]),
    .lw_data(cfg_data[W_W-1:0]),
    .lb_we(cfg_we && cfg_sel == CFG_FCU_LIN_B), .lb_addr(cfg_addr[CL_W-1:0]),
    .lb_data(cfg_data)
  );

  // DAC output of the decision
  logic             dac_busy, dac_done;
  logic [SPI_W-1:0] dac_rx;
  logic             dac_miso_unused;

  assign dac_miso_unused = 1'b0;   // the DAC has no data output

  spi_master #(.DATA_W(SPI_W), .CLK_DIV(SPI_DIV)) u_dac (
    .clk(clk), .rst_n(rst_n), .start(state == S_DAC),
    .tx_data({DAC_CMD, (SPI_W-4)'(class_out)}),
    .busy(dac_busy), .done(dac_done), .rx_data(dac_rx),
    .sclk(dac_sclk), .cs_n(dac_cs_n), .mosi(dac_mosi), .miso(dac_miso_unused)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      unit_q    <= UNIT_BCU;
      done      <= 1'b0;
      class_out <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          unit_q <= unit;
          state  <= use_adc ? S_ACQ : S_RUN;
        end
        S_ACQ:   if (acq_done) state <= S_RUN;
        S_RUN:   state <= S_CWAIT;
        S_CWAIT: begin
          if (unit_q == UNIT_BCU && bcu_done) begin
            class_out <= CL_W'(bcu_class);
            state     <= S_DAC;
          end else if (unit_q == UNIT_FCU && fcu_done) begin
            class_out <= fcu_class;
            state     <= S_DAC;
          end
        end
        S_DAC:   state <= S_DWAIT;
        S_DWAIT: if (dac_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !busy)
    else $error("neuro_top: configuration write during an inference");

endmodule
