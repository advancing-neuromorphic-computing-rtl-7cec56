// tb_neuro_top: end-to-end inferences through the whole chip at its default sizes
// (32x32 one-channel BCU images, 32x32x3 FCU images with two 4-channel convolution
// layers, 8 time steps).
//
// Four inferences: BCU with the image read from the ADC, BCU with the image written
// over the configuration bus, FCU over the bus, FCU from the ADC. They cover both
// units, both input paths, both spike codes and all four weight precisions. Each one
// is checked against the reference model: class, BCU spike counts or FCU class scores,
// and the frame the DAC receives. Every mechanism (ADC acquisition, bus loading, BCU,
// FCU, rate code, latency code, each precision, LIF firing, refractory hold, leak,
// DAC frame) is counted and must occur at least once.
module tb_neuro_top;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int BI = 32, BC = 2, FI = 32, FIC = 3, FC = 4, FC2 = 4, NCL = 10, K = 3, T = 8;
  localparam int BOH = BI - K + 1, FOH2 = FI - 2 * (K - 1);
  localparam int NBP = BI * BI, NFP = FIC * FI * FI, NF = FC2 * FOH2 * FOH2;
  localparam int CNT_W = $clog2(T * BOH * BOH + 1) + 1;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_adc = 0, n_bus = 0, n_bcu = 0, n_fcu = 0, n_rate = 0, n_lat = 0, n_dac = 0;
  int n_prec [4];
  int n_fire = 0, n_refr = 0, n_leak = 0;

  logic clk = 0, rst_n = 0;
  unit_e unit;
  logic use_adc = 0, start = 0, busy, done;
  logic [3:0] class_out;
  logic signed [CNT_W-1:0] bcu_spike_cnt [BC];
  logic signed [31:0] fcu_scores [NCL];
  prec_e prec;
  code_e code;
  lif_params_t prm;
  logic cfg_we = 0;
  cfg_sel_e cfg_sel;
  logic [16:0] cfg_addr = 0;
  logic [15:0] cfg_data = 0;
  logic adc_sclk, adc_cs_n, adc_mosi, adc_miso, dac_sclk, dac_cs_n, dac_mosi;

  logic [15:0] adc_word, adc_rx, dac_rx;
  int adc_frames, adc_edges, dac_frames, dac_edges;
  logic [11:0] adc_samples [NFP];
  logic dac_miso;

  neuro_top dut (.*);

  spi_slave_model #(.W(16)) adc (.sclk(adc_sclk), .cs_n(adc_cs_n), .mosi(adc_mosi),
    .miso(adc_miso), .tx_word(adc_word), .rx_word(adc_rx), .frames(adc_frames),
    .rising_edges(adc_edges));
  spi_slave_model #(.W(16)) dac (.sclk(dac_sclk), .cs_n(dac_cs_n), .mosi(dac_mosi),
    .miso(dac_miso), .tx_word(16'h0000), .rx_word(dac_rx), .frames(dac_frames),
    .rising_edges(dac_edges));

  int adc_base = 0;
  always_comb adc_word = {4'h0, adc_samples[(adc_frames - adc_base) % NFP]};

  always #5 clk = ~clk;

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(cfg_sel_e sel, int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_sel = sel; cfg_addr = 17'(addr); cfg_data = 16'(data);
  endtask

  task automatic cfg_end();
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic lifp_t set_lif(int vth, int vrest, int ls, int tref);
    lifp_t p;
    p.vth = vth; p.vrest = vrest; p.ls = ls; p.tref = tref;
    prm = '{v_th: 16'(vth), v_rest: 16'(vrest), leak_shift: 4'(ls), t_ref: 4'(tref)};
    if (ls != 0) n_leak++;
    return p;
  endfunction

  // count refractory holds and firings of a reference run by replaying its first conv
  // layer (only the first layer's weights and biases are read from wt/bs)
  task automatic count_lif(int img[], int IC, int I, int OC, int wt[], int bs[], lifp_t p);
    int vm[], rm[], sp[];
    for (int t = 0; t < T; t++) begin
      foreach (rm[n]) if (rm[n] != 0) n_refr++;
      conv_step(img, IC, I, I, OC, K, wt, bs, t, T, int'(code), int'(prec), p, t == 0, vm, rm, sp);
      foreach (sp[n]) n_fire += sp[n];
    end
  endtask

  task automatic run_and_check(unit_e u, bit from_adc, int want, int cnt[], longint sc[]);
    int d0, cyc;
    d0 = dac_frames;
    @(negedge clk); unit = u; use_adc = from_adc; start = 1;
    adc_base = adc_frames;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("inference unit=%0d adc=%0d code=%0d prec=%0d: class %0d (want %0d), %0d cycles",
             u, from_adc, code, prec, class_out, want, cyc);
    checks++;
    if (int'(class_out) != want) begin failures++; $display("FAIL class"); end
    if (u == UNIT_BCU) begin
      for (int c = 0; c < BC; c++) begin
        checks++;
        if (int'(bcu_spike_cnt[c]) != cnt[c]) begin
          failures++; $display("FAIL BCU count %0d: %0d want %0d", c, bcu_spike_cnt[c], cnt[c]);
        end
      end
      n_bcu++;
    end else begin
      for (int o = 0; o < NCL; o++) begin
        checks++;
        if (longint'(fcu_scores[o]) != sc[o]) begin
          failures++; $display("FAIL FCU score %0d: %0d want %0d", o, fcu_scores[o], sc[o]);
        end
      end
      n_fcu++;
    end
    checks++;
    if (dac_frames != d0 + 1 || dac_rx != {4'h0, 12'(want)}) begin
      failures++; $display("FAIL DAC frame %h (%0d frames)", dac_rx, dac_frames - d0);
    end else n_dac++;
    if (from_adc) n_adc++; else n_bus++;
    if (code == CODE_RATE) n_rate++; else n_lat++;
    n_prec[int'(prec)]++;
  endtask

  // BCU inference; the image comes from the ADC or the bus
  task automatic bcu_run(bit from_adc, code_e cd, prec_e pr, lifp_t p);
    int img[], wt[], bs[], cnt[], want;
    longint sc[];
    img = new[NBP]; wt = new[BC * K * K]; bs = new[BC];
    code = cd; prec = pr;
    foreach (img[i]) begin
      adc_samples[i] = 12'($urandom);
      img[i] = int'(adc_samples[i][11:4]);
    end
    foreach (wt[i]) begin wt[i] = int'($urandom % 200) - 80; cfg_write(CFG_BCU_CONV_W, i, wt[i]); end
    foreach (bs[i]) begin bs[i] = int'($urandom % 30) - 10; cfg_write(CFG_BCU_CONV_B, i, bs[i]); end
    if (!from_adc) foreach (img[i]) cfg_write(CFG_BCU_PIX, i, img[i]);
    cfg_end();
    want = bcu_infer(img, BI, BI, BC, K, wt, bs, T, int'(code), int'(prec), p, cnt);
    count_lif(img, 1, BI, BC, wt, bs, p);
    run_and_check(UNIT_BCU, from_adc, want, cnt, sc);
  endtask

  // FCU inference; the image comes from the ADC or the bus
  task automatic fcu_run(bit from_adc, code_e cd, prec_e pr, lifp_t p);
    int img[], cw[], cb[], lw[], lb[], cnt[], want, ts;
    longint sc[];
    img = new[NFP]; cw = new[FC * FIC * K * K + FC2 * FC * K * K];
    cb = new[FC + FC2]; lw = new[NF * NCL]; lb = new[NCL];
    code = cd; prec = pr;
    foreach (img[i]) begin
      adc_samples[i] = 12'($urandom);
      img[i] = int'(adc_samples[i][11:4]);
    end
    foreach (cw[i]) begin cw[i] = int'($urandom % 200) - 90; cfg_write(CFG_FCU_CONV_W, i, cw[i]); end
    foreach (cb[i]) begin cb[i] = int'($urandom % 30) - 15; cfg_write(CFG_FCU_CONV_B, i, cb[i]); end
    foreach (lw[i]) begin lw[i] = int'($urandom % 256) - 128; cfg_write(CFG_FCU_LIN_W, i, lw[i]); end
    foreach (lb[i]) begin lb[i] = int'($urandom % 400) - 200; cfg_write(CFG_FCU_LIN_B, i, lb[i]); end
    if (!from_adc) foreach (img[i]) cfg_write(CFG_FCU_PIX, i, img[i]);
    cfg_end();
    want = fcu_infer(img, FIC, FI, FI, FC, FC2, K, NCL, cw, cb, lw, lb, T, int'(code), int'(prec),
                     p, sc, ts);
    count_lif(img, FIC, FI, FC, cw, cb, p);
    run_and_check(UNIT_FCU, from_adc, want, cnt, sc);
  endtask

  initial begin
    lifp_t p;
    cfg_sel = CFG_BCU_PIX; unit = UNIT_BCU; prec = PREC_INT8; code = CODE_RATE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    p = set_lif(60, 0, 2, 1);  bcu_run(1'b1, CODE_RATE,    PREC_INT8, p);
    p = set_lif(30, -4, 0, 2); bcu_run(1'b0, CODE_LATENCY, PREC_BIN,  p);
    p = set_lif(20, 0, 1, 1);  fcu_run(1'b0, CODE_RATE,    PREC_INT4, p);
    p = set_lif(4, 0, 3, 0);   fcu_run(1'b1, CODE_LATENCY, PREC_INT2, p);
    $display("mechanisms: adc=%0d bus=%0d bcu=%0d fcu=%0d rate=%0d latency=%0d dac=%0d",
             n_adc, n_bus, n_bcu, n_fcu, n_rate, n_lat, n_dac);
    $display("precisions: bin=%0d int2=%0d int4=%0d int8=%0d; lif fire=%0d refractory=%0d leak=%0d",
             n_prec[0], n_prec[1], n_prec[2], n_prec[3], n_fire, n_refr, n_leak);
    checks++;
    if (n_adc == 0 || n_bus == 0 || n_bcu == 0 || n_fcu == 0 || n_rate == 0 || n_lat == 0 ||
        n_dac == 0 || n_prec[0] == 0 || n_prec[1] == 0 || n_prec[2] == 0 || n_prec[3] == 0 ||
        n_fire == 0 || n_refr == 0 || n_leak == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
