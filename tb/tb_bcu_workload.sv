// tb_bcu_workload: the BCU at its default size (32x32 images, 2 channels, 8 steps)
// on synthetic MRI-like slices, with hand-set weights that make it a lesion detector.
//
// Images: tissue of random intensity 40..120, and in half of them a bright disc
// ("lesion", radius 2..5, intensity 200..255) at a random place. Rate code. Weights:
//   channel 1 (tumour): all nine taps +8, bias -48. A window full of bright pixels
//     gets +24 in most steps; in rate code a tissue pixel (< 128) never spikes in
//     two consecutive steps, a bright one does. With threshold 30 and leak 1/2,
//     only two consecutive strong steps fire, so only lesion windows fire.
//   channel 0 (no tumour): all taps -8, bias -1: never fires, so a tie (no lesion
//     spikes) decides class 0.
// A binary-precision variant (all weights +/-1 effective, bias -6, threshold 5) is
// run as well. Checks: counts and class match the reference model exactly, and every
// image is classified as its label. Accuracy is printed.
module tb_bcu_workload;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int I = 32, C = 2, K = 3, T = 8, NP = I * I;
  localparam int CNT_W = $clog2(T * (I - K + 1) * (I - K + 1) + 1) + 1;

  int checks = 0, failures = 0, correct = 0, total = 0;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  code_e code;
  lif_params_t prm;
  logic start = 0, busy, done;
  logic class_out;
  logic signed [CNT_W-1:0] spike_cnt [C];
  logic pix_we = 0, w_we = 0, b_we = 0;
  logic [9:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [4:0] w_addr = 0;
  logic signed [7:0] w_data = 0;
  logic b_addr = 0;
  logic signed [15:0] b_data = 0;

  bcu_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic classify(int img[], int wt[], int bs[], lifp_t p, int label);
    int cnt[], want;
    foreach (img[i]) begin
      @(negedge clk); pix_we = 1; pix_addr = 10'(i); pix_data = 8'(img[i]);
    end
    @(negedge clk); pix_we = 0;
    foreach (wt[i]) begin
      @(negedge clk); w_we = 1; w_addr = 5'(i); w_data = 8'(wt[i]);
    end
    @(negedge clk); w_we = 0;
    foreach (bs[i]) begin
      @(negedge clk); b_we = 1; b_addr = 1'(i); b_data = 16'(bs[i]);
    end
    @(negedge clk); b_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    want = bcu_infer(img, I, I, C, K, wt, bs, T, int'(code), int'(prec), p, cnt);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (int'(spike_cnt[c]) != cnt[c]) begin
        failures++; $display("FAIL count %0d: %0d want %0d", c, spike_cnt[c], cnt[c]);
      end
    end
    checks++;
    if (int'(class_out) != want) begin failures++; $display("FAIL class vs reference"); end
    checks++;
    total++;
    if (int'(class_out) == label) correct++;
    else begin failures++; $display("FAIL image with label %0d classified %0d", label, class_out); end
    $display("label %0d -> class %0d (spikes %0d / %0d)", label, class_out, spike_cnt[0], spike_cnt[1]);
  endtask

  initial begin
    int img[], wt[], bs[];
    lifp_t p;
    img = new[NP]; wt = new[C * K * K]; bs = new[C];
    code = CODE_RATE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int variant = 0; variant < 2; variant++) begin
      if (variant == 0) begin
        prec = PREC_INT8;
        for (int k = 0; k < 9; k++) begin wt[k] = -8; wt[9 + k] = 8; end
        bs[0] = -1; bs[1] = -48;
        p.vth = 30; p.vrest = 0; p.ls = 1; p.tref = 0;
      end else begin
        prec = PREC_BIN;
        for (int k = 0; k < 9; k++) begin wt[k] = -1; wt[9 + k] = 1; end
        bs[0] = -1; bs[1] = -6;
        p.vth = 5; p.vrest = 0; p.ls = 1; p.tref = 0;
      end
      prm = '{v_th: 16'(p.vth), v_rest: 16'(p.vrest), leak_shift: 4'(p.ls), t_ref: 4'(p.tref)};
      for (int n = 0; n < 8; n++) begin
        int label, cy, cx, r;
        label = n % 2;
        foreach (img[i]) img[i] = 40 + int'($urandom % 81);
        if (label == 1) begin
          r = 2 + int'($urandom % 4);
          cy = r + int'($urandom % (I - 2 * r)); cx = r + int'($urandom % (I - 2 * r));
          for (int y = 0; y < I; y++)
            for (int x = 0; x < I; x++)
              if ((y - cy) * (y - cy) + (x - cx) * (x - cx) <= r * r)
                img[y * I + x] = 200 + int'($urandom % 56);
        end
        classify(img, wt, bs, p, label);
      end
    end
    $display("accuracy %0d / %0d", correct, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
