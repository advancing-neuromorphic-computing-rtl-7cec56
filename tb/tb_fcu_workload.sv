// tb_fcu_workload: the FCU at its default size (32x32x3 images, two 4-channel conv
// layers, 3136x10 linear layer, 8 steps) on ten synthetic image classes, with
// hand-set weights.
//
// Class k is a bright bar (intensity 190..255) across image rows 3k+1..3k+3, of
// random length (at least 12 columns), in colour channel k mod 3, over dark noise
// (0..60) in all channels. Rate code. Convolution channel c < 3 has only its centre
// tap on colour c (+20, bias -4): a pixel spiking in two consecutive steps (only
// bright ones do) fires the neuron (threshold 20, leak 1/2). Channel 3 never fires.
// Second conv layer: channel c < 3 has only its centre tap on layer-1 channel c (+40,
// bias -4), so it repeats layer 1's map shifted by one row and column; channel 3
// never fires. Linear weights: class k has +4 on its bar's rows (second-layer rows
// 3k-1..3k+1) of channel k mod 3, -1 on the rest of that channel, 0 elsewhere. Checks: class scores and class match the
// reference model exactly and every image is classified as its label.
module tb_fcu_workload;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int I = 32, IC = 3, C = 4, C2 = 4, K = 3, NCL = 10, T = 8;
  localparam int OH = I - 2 * (K - 1), NP = IC * I * I, NF = C2 * OH * OH;
  localparam int NCW1 = C * IC * K * K, NCW = NCW1 + C2 * C * K * K;

  int checks = 0, failures = 0, correct = 0;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  code_e code;
  lif_params_t prm;
  logic start = 0, busy, done;
  logic [3:0] class_out;
  logic signed [31:0] scores [NCL];
  logic pix_we = 0, cw_we = 0, cb_we = 0, lw_we = 0, lb_we = 0;
  logic [11:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [7:0] cw_addr = 0;
  logic signed [7:0] cw_data = 0, lw_data = 0;
  logic [2:0] cb_addr = 0;
  logic signed [15:0] cb_data = 0, lb_data = 0;
  logic [14:0] lw_addr = 0;
  logic [3:0] lb_addr = 0;

  fcu_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[], cw[], cb[], lw[], lb[], ts, want;
    longint sc[];
    lifp_t p;
    img = new[NP]; cw = new[NCW]; cb = new[C + C2]; lw = new[NF * NCL]; lb = new[NCL];
    prec = PREC_INT8; code = CODE_RATE;
    p.vth = 20; p.vrest = 0; p.ls = 1; p.tref = 0;
    prm = '{v_th: 16'(p.vth), v_rest: 16'(p.vrest), leak_shift: 4'(p.ls), t_ref: 4'(p.tref)};
    // weights
    foreach (cw[i]) cw[i] = 0;
    for (int c = 0; c < 3; c++) cw[c * IC * K * K + c * K * K + 4] = 20;
    for (int c = 0; c < 3; c++) cw[NCW1 + c * C * K * K + c * K * K + 4] = 40;
    cb[0] = -4; cb[1] = -4; cb[2] = -4; cb[3] = -100;
    cb[4] = -4; cb[5] = -4; cb[6] = -4; cb[7] = -100;
    foreach (lw[i]) lw[i] = 0;
    for (int k = 0; k < NCL; k++) begin
      int ch;
      ch = k % 3;
      lb[k] = 0;
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OH; x++)
          lw[k * NF + ch * OH * OH + y * OH + x] = (y >= 3 * k - 1 && y <= 3 * k + 1) ? 4 : -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (cw[i]) begin @(negedge clk); cw_we = 1; cw_addr = 8'(i); cw_data = 8'(cw[i]); end
    @(negedge clk); cw_we = 0;
    foreach (cb[i]) begin @(negedge clk); cb_we = 1; cb_addr = 3'(i); cb_data = 16'(cb[i]); end
    @(negedge clk); cb_we = 0;
    foreach (lw[i]) begin @(negedge clk); lw_we = 1; lw_addr = 15'(i); lw_data = 8'(lw[i]); end
    @(negedge clk); lw_we = 0;
    foreach (lb[i]) begin @(negedge clk); lb_we = 1; lb_addr = 4'(i); lb_data = 16'(lb[i]); end
    @(negedge clk); lb_we = 0;
    for (int k = 0; k < NCL; k++) begin
      int x0, x1;
      foreach (img[i]) img[i] = int'($urandom % 61);
      x0 = 1 + int'($urandom % 10);
      x1 = x0 + 11 + int'($urandom % (31 - x0 - 11 + 1));
      for (int y = 3 * k + 1; y <= 3 * k + 3; y++)
        for (int x = x0; x <= x1 && x < I; x++)
          img[(k % 3) * I * I + y * I + x] = 190 + int'($urandom % 66);
      foreach (img[i]) begin
        @(negedge clk); pix_we = 1; pix_addr = 12'(i); pix_data = 8'(img[i]);
      end
      @(negedge clk); pix_we = 0; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      want = fcu_infer(img, IC, I, I, C, C2, K, NCL, cw, cb, lw, lb, T, int'(code), int'(prec),
                       p, sc, ts);
      for (int o = 0; o < NCL; o++) begin
        checks++;
        if (longint'(scores[o]) != sc[o]) begin
          failures++; $display("FAIL image %0d score %0d: %0d want %0d", k, o, scores[o], sc[o]);
        end
      end
      checks++;
      if (int'(class_out) != want) begin failures++; $display("FAIL class vs reference"); end
      checks++;
      if (int'(class_out) == k) correct++;
      else begin failures++; $display("FAIL image of class %0d classified %0d", k, class_out); end
      $display("class %0d -> %0d (score %0d, LIF spikes %0d)", k, class_out, scores[class_out], ts);
    end
    $display("accuracy %0d / %0d", correct, NCL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
