// spi_master: SPI master for the converters of the mixed-signal interface.
//
// SPI mode 0 (clock idles low, data changed on the falling edge and sampled on the
// rising edge), most significant bit first, one DATA_W-bit frame per transfer with
// chip select held low for the whole frame. The serial clock runs at
// clk / (2*CLK_DIV).
// Interface: pulse `start` with `tx_data` while `busy` is low; `done` pulses for one
// cycle when the frame is over and `rx_data` holds the bits read on `miso`.
// Timing: done comes 2*CLK_DIV*DATA_W + 1 cycles after start.
// That the ADC and DAC are reached over SPI follows the design description; mode,
// frame length and clock rate are this design's own choices (none is given).
module spi_master #(
  parameter int DATA_W  = 16,
  parameter int CLK_DIV = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DATA_W-1:0] tx_data,
  output logic              busy,
  output logic              done,
  output logic [DATA_W-1:0] rx_data,
  output logic              sclk,
  output logic              cs_n,
  output logic              mosi,
  input  logic              miso
);

  logic [DATA_W-1:0]            sh_tx, sh_rx;
  logic [$clog2(CLK_DIV+1)-1:0] div;
  logic [$clog2(DATA_W+1)-1:0]  bits;

  assign busy = !cs_n;
  assign mosi = sh_tx[DATA_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_n    <= 1'b1;
      sclk    <= 1'b0;
      done    <= 1'b0;
      div     <= '0;
      bits    <= '0;
      sh_tx   <= '0;
      sh_rx   <= '0;
      rx_data <= '0;
    end else begin
      done <= 1'b0;
      if (cs_n) begin
        if (start) begin
          cs_n  <= 1'b0;
          sclk  <= 1'b0;
          sh_tx <= tx_data;
          div   <= '0;
          bits  <= '0;
        end
      end else if (int'(div) == CLK_DIV - 1) begin
        div <= '0;
        if (!sclk) begin
          sclk  <= 1'b1;
          sh_rx <= {sh_rx[DATA_W-2:0], miso};
        end else begin
          sclk <= 1'b0;
          if (int'(bits) == DATA_W - 1) begin
            cs_n    <= 1'b1;
            done    <= 1'b1;
            rx_data <= sh_rx;
          end else begin
            bits  <= bits + 1'b1;
            sh_tx <= {sh_tx[DATA_W-2:0], 1'b0};
          end
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> cs_n)
    else $error("spi_master: start while a frame is in progress");

endmodule
