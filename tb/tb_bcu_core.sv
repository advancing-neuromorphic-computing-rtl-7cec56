// tb_bcu_core: complete BCU inferences on random images, weights and LIF settings,
// in rate and latency code and at all weight precisions. Checks the per-channel spike
// counts, the predicted class and the inference time against the reference model;
// both classes must be predicted at least once.
module tb_bcu_core;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int IH = 8, IW = 7, OC = 2, K = 3, T = 4;
  localparam int OH = IH - K + 1, OW = IW - K + 1, NP = IH * IW;
  localparam int CNT_W = $clog2(T * OH * OW + 1) + 1;

  int checks = 0, failures = 0;
  int class_seen [2];
  logic clk = 0, rst_n = 0;
  prec_e prec;
  code_e code;
  lif_params_t prm;
  logic start = 0, busy, done;
  logic class_out;
  logic signed [CNT_W-1:0] spike_cnt [OC];
  logic pix_we = 0, w_we = 0, b_we = 0;
  logic [$clog2(NP)-1:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [$clog2(OC*K*K)-1:0] w_addr = 0;
  logic signed [7:0] w_data = 0;
  logic b_addr = 0;
  logic signed [15:0] b_data = 0;

  bcu_core #(.IMG_H(IH), .IMG_W(IW), .IMG_C(1), .CONV_C(OC), .K(K), .T_STEPS(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[], wt[], bs[], cnt[];
    lifp_t p;
    img = new[NP]; wt = new[OC * K * K]; bs = new[OC];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 16; run++) begin
      int want, cyc;
      prec = prec_e'(run % 4);
      code = code_e'((run / 4) % 2);
      p.vth = 20 + int'($urandom % 40); p.vrest = 0; p.ls = run % 3; p.tref = run % 2;
      prm = '{v_th: 16'(p.vth), v_rest: 16'(p.vrest), leak_shift: 4'(p.ls), t_ref: 4'(p.tref)};
      foreach (img[i]) begin
        img[i] = int'($urandom % 256);
        @(negedge clk); pix_we = 1; pix_addr = 6'(i); pix_data = 8'(img[i]);
      end
      foreach (wt[i]) begin
        wt[i] = int'($urandom % 256) - 100;
        @(negedge clk); pix_we = 0; w_we = 1; w_addr = 5'(i); w_data = 8'(wt[i]);
      end
      foreach (bs[i]) begin
        bs[i] = int'($urandom % 40) - 20;
        @(negedge clk); w_we = 0; b_we = 1; b_addr = 1'(i); b_data = 16'(bs[i]);
      end
      @(negedge clk); b_we = 0; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      want = bcu_infer(img, IH, IW, OC, K, wt, bs, T, int'(code), int'(prec), p, cnt);
      checks++;
      if (cyc != T * (OC * OH * OW * (K * K + 2) + 2) + 2) begin
        failures++; $display("FAIL run %0d took %0d cycles", run, cyc);
      end
      for (int c = 0; c < OC; c++) begin
        checks++;
        if (int'(spike_cnt[c]) != cnt[c]) begin
          failures++; $display("FAIL run %0d channel %0d count %0d want %0d", run, c, spike_cnt[c], cnt[c]);
        end
      end
      checks++;
      if (int'(class_out) != want) begin
        failures++; $display("FAIL run %0d class %0d want %0d", run, class_out, want);
      end
      class_seen[want]++;
    end
    checks++;
    if (class_seen[0] == 0 || class_seen[1] == 0) begin
      failures++; $display("FAIL only one class predicted");
    end
    $display("class counts %0d %0d", class_seen[0], class_seen[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
