// tb_fcu_core: complete FCU inferences (two convolution + LIF layers, then a linear
// layer over the time steps) on random 7x7x2 images and weights, in both spike codes
// and all weight precisions. Checks every class score, the predicted class and the
// inference time against the reference model. Over the runs more than one class must
// be predicted, the LIF layers must have fired, and the second layer's spikes must
// have moved some score away from its bias-only value.
module tb_fcu_core;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int IH = 7, IW = 7, IC = 2, OC = 2, OC2 = 2, K = 3, NCL = 4, T = 3;
  localparam int OH = IH - K + 1, OW = IW - K + 1, NP = IC * IH * IW, NF1 = OC * OH * OW;
  localparam int NF = OC2 * (OH - K + 1) * (OW - K + 1);
  localparam int NCW = OC * IC * K * K + OC2 * OC * K * K;

  int checks = 0, failures = 0, spikes = 0, distinct = 0, l2_moved = 0;
  int class_seen [NCL];
  logic clk = 0, rst_n = 0;
  prec_e prec;
  code_e code;
  lif_params_t prm;
  logic start = 0, busy, done;
  logic [1:0] class_out;
  logic signed [31:0] scores [NCL];
  logic pix_we = 0, cw_we = 0, cb_we = 0, lw_we = 0, lb_we = 0;
  logic [$clog2(NP)-1:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic [$clog2(NCW)-1:0] cw_addr = 0;
  logic signed [7:0] cw_data = 0, lw_data = 0;
  logic [1:0] cb_addr = 0;
  logic signed [15:0] cb_data = 0, lb_data = 0;
  logic [$clog2(NF*NCL)-1:0] lw_addr = 0;
  logic [1:0] lb_addr = 0;

  fcu_core #(.IMG_H(IH), .IMG_W(IW), .IMG_C(IC), .CONV_C(OC), .CONV2_C(OC2), .K(K),
             .N_CLASSES(NCL), .T_STEPS(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img[], cw[], cb[], lw[], lb[], ts;
    longint sc[];
    lifp_t p;
    img = new[NP]; cw = new[NCW]; cb = new[OC + OC2]; lw = new[NF * NCL]; lb = new[NCL];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 16; run++) begin
      int want, cyc;
      prec = prec_e'(run % 4);
      code = code_e'((run / 4) % 2);
      p.vth = 20 + int'($urandom % 40); p.vrest = -2; p.ls = run % 3; p.tref = run % 2;
      prm = '{v_th: 16'(p.vth), v_rest: 16'(p.vrest), leak_shift: 4'(p.ls), t_ref: 4'(p.tref)};
      foreach (img[i]) begin
        img[i] = int'($urandom % 256);
        @(negedge clk); pix_we = 1; pix_addr = 7'(i); pix_data = 8'(img[i]);
      end
      @(negedge clk); pix_we = 0;
      foreach (cw[i]) begin
        cw[i] = int'($urandom % 256) - 100;
        @(negedge clk); cw_we = 1; cw_addr = 7'(i); cw_data = 8'(cw[i]);
      end
      @(negedge clk); cw_we = 0;
      foreach (cb[i]) begin
        cb[i] = int'($urandom % 40) - 20;
        @(negedge clk); cb_we = 1; cb_addr = 2'(i); cb_data = 16'(cb[i]);
      end
      @(negedge clk); cb_we = 0;
      foreach (lw[i]) begin
        lw[i] = int'($urandom % 256) - 128;
        @(negedge clk); lw_we = 1; lw_addr = 7'(i); lw_data = 8'(lw[i]);
      end
      @(negedge clk); lw_we = 0;
      foreach (lb[i]) begin
        lb[i] = int'($urandom % 400) - 200;
        @(negedge clk); lb_we = 1; lb_addr = 2'(i); lb_data = 16'(lb[i]);
      end
      @(negedge clk); lb_we = 0; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      want = fcu_infer(img, IC, IH, IW, OC, OC2, K, NCL, cw, cb, lw, lb, T, int'(code), int'(prec),
                       p, sc, ts);
      spikes += ts;
      checks++;
      if (cyc != T * (NF1 * (IC * K * K + 2) + NF * (OC * K * K + 2) + NCL * (NF + 2) + 6) + 2)
      begin
        failures++; $display("FAIL run %0d took %0d cycles", run, cyc);
      end
      for (int o = 0; o < NCL; o++) begin
        checks++;
        if (longint'(scores[o]) != sc[o]) begin
          failures++; $display("FAIL run %0d class %0d score %0d want %0d", run, o, scores[o], sc[o]);
        end
      end
      checks++;
      if (int'(class_out) != want) begin
        failures++; $display("FAIL run %0d class %0d want %0d", run, class_out, want);
      end
      class_seen[want]++;
      for (int o = 0; o < NCL; o++) if (sc[o] != longint'(T * lb[o])) l2_moved++;
    end
    foreach (class_seen[o]) if (class_seen[o] != 0) distinct++;
    checks++;
    if (distinct < 2 || spikes == 0 || l2_moved == 0) begin
      failures++;
      $display("FAIL coverage: %0d classes, %0d spikes, %0d scores moved", distinct, spikes,
               l2_moved);
    end
    $display("classes predicted: %0d, LIF spikes: %0d", distinct, spikes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
