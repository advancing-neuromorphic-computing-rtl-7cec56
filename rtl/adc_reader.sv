// adc_reader: acquires a frame of samples from the SPI ADC into an input buffer.
//
// On `start` it performs `n_samples` SPI transfers, one per sample. Each frame sends
// ADC_CMD (a conversion command word) and receives a DATA_W-bit word whose low
// ADC_BITS bits are the conversion result. The top PIX_W bits of the result become
// one pixel, written through wr_en/wr_addr/wr_data to consecutive addresses from 0.
// `done` pulses one cycle after the last pixel is written.
// Timing: n_samples * (2*CLK_DIV*DATA_W + 3) + 1 cycles from start to done.
// The ADC turning sensor signals into digital data over SPI follows the design
// description; frame format, resolution and the reduction to 8-bit pixels are this
// design's own choices.
module adc_reader
  import snn_pkg::*;
#(
  parameter int              N_MAX    = 3072,
  parameter int              ADC_BITS = 12,
  parameter int              DATA_W   = 16,
  parameter int              CLK_DIV  = 4,
  parameter logic [DATA_W-1:0] ADC_CMD = '0,
  parameter int              A_W      = $clog2(N_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [A_W-1:0]   n_samples,
  output logic             busy,
  output logic             done,
  output logic             wr_en,
  output logic [A_W-1:0]   wr_addr,
  output logic [PIX_W-1:0] wr_data,
  output logic             sclk,
  output logic             cs_n,
  output logic             mosi,
  input  logic             miso
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_WRITE} state_e;
  state_e state;

  logic              spi_done;
  logic [DATA_W-1:0] spi_rx;
  logic              spi_busy;
  logic [A_W-1:0]    count;
  logic [PIX_W-1:0]  sample;

  spi_master #(.DATA_W(DATA_W), .CLK_DIV(CLK_DIV)) u_spi (
    .clk(clk), .rst_n(rst_n), .start(state == S_REQ), .tx_data(ADC_CMD),
    .busy(spi_busy), .done(spi_done), .rx_data(spi_rx),
    .sclk(sclk), .cs_n(cs_n), .mosi(mosi), .miso(miso)
  );

  assign busy    = (state != S_IDLE);
  assign wr_en   = (state == S_WRITE);
  assign wr_addr = count;
  assign wr_data = sample;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      count  <= '0;
      sample <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          count <= '0;
          if (n_samples != '0) state <= S_REQ;
          else                 done  <= 1'b1;
        end
        S_REQ:  state <= S_WAIT;
        S_WAIT: if (spi_done) begin
          sample <= spi_rx[ADC_BITS-1 -: PIX_W];
          state  <= S_WRITE;
        end
        S_WRITE: begin
          count <= count + 1'b1;
          if (count == n_samples - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
