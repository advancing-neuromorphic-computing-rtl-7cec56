// tb_spi_master: random full-duplex frames against the SPI slave model. Checks the
// word the slave received, the word the master read, the number of clock edges per
// frame and the frame time 2*CLK_DIV*DATA_W+1 cycles, for two clock dividers.
module tb_spi_master;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // divider 4 (the default) and divider 1
  logic        s4 = 0, s1 = 0, b4, b1, d4, d1;
  logic [15:0] tx4 = 0, tx1 = 0, rx4, rx1;
  logic        sclk4, cs4, mosi4, miso4, sclk1, cs1, mosi1, miso1;
  logic [15:0] stx4 = 0, stx1 = 0, srx4, srx1;
  int          fr4, fr1, re4, re1;

  spi_master #(.DATA_W(16), .CLK_DIV(4)) m4 (.clk(clk), .rst_n(rst_n), .start(s4),
    .tx_data(tx4), .busy(b4), .done(d4), .rx_data(rx4), .sclk(sclk4), .cs_n(cs4),
    .mosi(mosi4), .miso(miso4));
  spi_master #(.DATA_W(16), .CLK_DIV(1)) m1 (.clk(clk), .rst_n(rst_n), .start(s1),
    .tx_data(tx1), .busy(b1), .done(d1), .rx_data(rx1), .sclk(sclk1), .cs_n(cs1),
    .mosi(mosi1), .miso(miso1));

  spi_slave_model #(.W(16)) sl4 (.sclk(sclk4), .cs_n(cs4), .mosi(mosi4), .miso(miso4),
    .tx_word(stx4), .rx_word(srx4), .frames(fr4), .rising_edges(re4));
  spi_slave_model #(.W(16)) sl1 (.sclk(sclk1), .cs_n(cs1), .mosi(mosi1), .miso(miso1),
    .tx_word(stx1), .rx_word(srx1), .frames(fr1), .rising_edges(re1));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      int cyc, e0, f0;
      bit use4;
      use4 = (k % 2) == 0;
      @(negedge clk);
      if (use4) begin
        tx4 = 16'($urandom); stx4 = 16'($urandom); e0 = re4; f0 = fr4; s4 = 1;
      end else begin
        tx1 = 16'($urandom); stx1 = 16'($urandom); e0 = re1; f0 = fr1; s1 = 1;
      end
      @(negedge clk); s4 = 0; s1 = 0; cyc = 1;
      while (!(use4 ? d4 : d1)) begin @(negedge clk); cyc++; end
      #1;
      checks++;
      if (cyc != 2 * (use4 ? 4 : 1) * 16 + 1) begin
        failures++; $display("FAIL frame %0d took %0d cycles", k, cyc);
      end
      checks++;
      if (use4 ? (rx4 != stx4 || srx4 != tx4 || fr4 != f0 + 1 || re4 != e0 + 16)
               : (rx1 != stx1 || srx1 != tx1 || fr1 != f0 + 1 || re1 != e0 + 16)) begin
        failures++;
        $display("FAIL frame %0d div %0d: master rx %h slave tx %h / slave rx %h master tx %h",
                 k, use4 ? 4 : 1, use4 ? rx4 : rx1, use4 ? stx4 : stx1,
                 use4 ? srx4 : srx1, use4 ? tx4 : tx1);
      end
      checks++;
      if (!cs4 || !cs1 || b4 || b1) begin failures++; $display("FAIL chip select after frame"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
