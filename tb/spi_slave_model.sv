// spi_slave_model: behavioural model of an SPI converter (ADC or DAC) for the
// testbenches. Not synthesizable.
//
// SPI mode 0, MSB first, W-bit frames. When chip select falls the model loads
// `tx_word` and drives its MSB on miso, shifting the next bit out on each falling
// sclk edge (an ADC returning a conversion result). It samples mosi on each rising
// edge; when chip select rises after a full frame, the received word appears on
// `rx_word` and `frames` counts it (a DAC taking a new code).
module spi_slave_model #(
  parameter int W = 16
) (
  input  logic         sclk,
  input  logic         cs_n,
  input  logic         mosi,
  output logic         miso,
  input  logic [W-1:0] tx_word,
  output logic [W-1:0] rx_word,
  output int           frames,
  output int           rising_edges
);

  logic [W-1:0] sh_out, sh_in;
  int nbits;

  initial begin
    miso = 1'b0; rx_word = '0; frames = 0; rising_edges = 0; nbits = 0;
    sh_out = '0; sh_in = '0;
  end

  always @(negedge cs_n) begin
    sh_out = tx_word;
    miso   = sh_out[W-1];
    nbits  = 0;
  end

  always @(posedge sclk) if (!cs_n) begin
    sh_in = {sh_in[W-2:0], mosi};
    nbits++;
    rising_edges++;
  end

  always @(negedge sclk) if (!cs_n) begin
    sh_out = {sh_out[W-2:0], 1'b0};
    miso   = sh_out[W-1];
  end

  always @(posedge cs_n) if (nbits == W) begin
    rx_word = sh_in;
    frames++;
    nbits = 0;
  end

endmodule
