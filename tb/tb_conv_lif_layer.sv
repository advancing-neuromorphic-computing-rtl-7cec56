// tb_conv_lif_layer: runs a small convolutional LIF layer for several time steps
// with random weights, biases and input spike maps, and compares every output spike
// and the cycle count of each step with the integer reference. Covers all four
// weight precisions, leak on and off, refractory periods and a restart (t_first).
module tb_conv_lif_layer;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int IC = 2, IH = 6, IW = 5, OC = 3, K = 3;
  localparam int OH = IH - K + 1, OW = IW - K + 1;
  localparam int NI = IC * IH * IW, NO = OC * OH * OW, KK = IC * K * K;

  int checks = 0, failures = 0, spikes = 0, refr_hold = 0;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  lif_params_t prm;
  logic start = 0, t_first = 0, busy, done;
  logic [$clog2(NI)-1:0] in_addr;
  logic in_spike;
  logic out_we, out_spike;
  logic [$clog2(NO)-1:0] out_addr;
  logic [1:0] out_ch;
  logic w_we = 0, b_we = 0;
  logic [$clog2(OC*KK)-1:0] w_addr = 0;
  logic signed [7:0] w_data = 0;
  logic [1:0] b_addr = 0;
  logic signed [15:0] b_data = 0;

  bit in_map [NI];
  int wt [OC*KK], bs [OC];
  int vm [NO], rm [NO];
  bit got [NO];
  int got_n;

  assign in_spike = in_map[in_addr];

  conv_lif_layer #(.IN_C(IC), .IN_H(IH), .IN_W(IW), .OUT_C(OC), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_we) begin
    got[out_addr] <= out_spike;
    got_n <= got_n + 1;
    if (int'(out_ch) != int'(out_addr) / (OH * OW)) begin
      failures++; $display("FAIL out_ch %0d for neuron %0d", out_ch, out_addr);
    end
  end

  task automatic load_params();
    for (int a = 0; a < OC * KK; a++) begin
      @(negedge clk); w_we = 1; w_addr = a[$bits(w_addr)-1:0]; wt[a] = int'($urandom % 256) - 128;
      w_data = 8'(wt[a]);
    end
    @(negedge clk); w_we = 0;
    for (int c = 0; c < OC; c++) begin
      @(negedge clk); b_we = 1; b_addr = 2'(c); bs[c] = int'($urandom % 120) - 60; b_data = 16'(bs[c]);
    end
    @(negedge clk); b_we = 0;
  endtask

  task automatic run_step(bit first);
    int cyc, want_cyc;
    for (int i = 0; i < NI; i++) in_map[i] = ($urandom % 3) == 0;
    got_n = 0;
    @(negedge clk); start = 1; t_first = first;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    want_cyc = NO * (KK + 2) + 1;
    checks++;
    if (cyc != want_cyc) begin failures++; $display("FAIL cycles %0d want %0d", cyc, want_cyc); end
    checks++;
    if (got_n != NO) begin failures++; $display("FAIL %0d outputs", got_n); end
    // reference
    for (int c = 0; c < OC; c++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++) begin
          int n, cur;
          bit s;
          n = c * OH * OW + y * OW + x;
          cur = bs[c];
          for (int i = 0; i < IC; i++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                if (in_map[i * IH * IW + (y + ky) * IW + x + kx])
                  cur += weff(wt[c * KK + i * K * K + ky * K + kx], int'(prec));
          if (first) begin vm[n] = prm.v_rest; rm[n] = 0; end
          if (rm[n] != 0) refr_hold++;
          s = lif(vm[n], rm[n], cur, prm.v_th, prm.v_rest, prm.leak_shift, prm.t_ref);
          spikes += s;
          checks++;
          if (got[n] != s) begin
            failures++; $display("FAIL neuron %0d got %0d want %0d", n, got[n], s);
          end
        end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      prec = prec_e'(run % 4);
      prm.v_th = 16'sd40 + 16'(run * 10);
      prm.v_rest = 16'(-(run % 3));
      prm.leak_shift = 4'((run % 2) ? 2 : 0);
      prm.t_ref = 4'(run % 3);
      load_params();
      for (int t = 0; t < 6; t++) run_step(t == 0);
    end
    checks++;
    if (spikes == 0 || refr_hold == 0) begin
      failures++; $display("FAIL coverage spikes=%0d refractory=%0d", spikes, refr_hold);
    end
    $display("spikes=%0d refractory holds=%0d", spikes, refr_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
