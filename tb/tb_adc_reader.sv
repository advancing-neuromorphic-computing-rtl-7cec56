// tb_adc_reader: the reader fetches a frame of samples from the SPI ADC model; each
// written pixel must be the top 8 of the 12 sample bits, at consecutive addresses,
// and the frame must take n*(2*CLK_DIV*DATA_W+3)+1 cycles. Run twice, with a
// zero-length request in between.
module tb_adc_reader;

  localparam int N_MAX = 20, DIV = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, wr_en;
  logic [$clog2(N_MAX+1)-1:0] n_samples = 0, wr_addr;
  logic [7:0] wr_data;
  logic sclk, cs_n, mosi, miso;
  logic [15:0] adc_word = 0, adc_rx;
  int frames, edges;
  logic [11:0] samples [N_MAX];
  logic [7:0]  buffer [N_MAX];
  int writes;

  adc_reader #(.N_MAX(N_MAX), .ADC_BITS(12), .DATA_W(16), .CLK_DIV(DIV)) dut (.*);

  spi_slave_model #(.W(16)) adc (.sclk(sclk), .cs_n(cs_n), .mosi(mosi), .miso(miso),
    .tx_word(adc_word), .rx_word(adc_rx), .frames(frames), .rising_edges(edges));

  // the ADC presents the next sample for every frame
  always_comb adc_word = {4'h0, samples[frames % N_MAX]};

  always #5 clk = ~clk;

  always @(posedge clk) if (wr_en) begin
    buffer[wr_addr] <= wr_data;
    writes <= writes + 1;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic acquire(int n);
    int cyc, f0;
    f0 = frames;
    for (int i = 0; i < N_MAX; i++) samples[i] = 12'($urandom);
    // samples are indexed by the frame count, so rotate them to start at f0
    writes = 0;
    @(negedge clk); n_samples = 5'(n); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != n * (2 * DIV * 16 + 3) + 1 && n != 0) begin
      failures++; $display("FAIL %0d samples took %0d cycles", n, cyc);
    end
    checks++;
    if (writes != n || frames != f0 + n) begin
      failures++; $display("FAIL writes=%0d frames=%0d", writes, frames - f0);
    end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (buffer[i] != samples[(f0 + i) % N_MAX][11:4]) begin
        failures++; $display("FAIL pixel %0d = %h want %h", i, buffer[i], samples[(f0 + i) % N_MAX][11:4]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N_MAX; i++) samples[i] = 0;
    writes = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    acquire(13);
    acquire(0);
    acquire(N_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
