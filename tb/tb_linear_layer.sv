// tb_linear_layer: runs a small linear layer for several time steps with random
// weights, biases and input spikes and compares the running class scores and the
// cycle count per step with the integer reference, at all four precisions.
module tb_linear_layer;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int NI = 37, NO = 5;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  logic start = 0, t_first = 0, busy, done;
  logic [$clog2(NI)-1:0] in_addr;
  logic in_spike;
  logic signed [31:0] scores [NO];
  logic w_we = 0, b_we = 0;
  logic [$clog2(NI*NO)-1:0] w_addr = 0;
  logic signed [7:0] w_data = 0;
  logic [2:0] b_addr = 0;
  logic signed [15:0] b_data = 0;

  bit in_map [NI];
  int wt [NI*NO], bs [NO];
  longint sc [NO];

  assign in_spike = in_map[in_addr];

  linear_layer #(.N_IN(NI), .N_OUT(NO), .SC_W(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      prec = prec_e'(run % 4);
      for (int a = 0; a < NI * NO; a++) begin
        @(negedge clk); w_we = 1; w_addr = a[$bits(w_addr)-1:0];
        wt[a] = int'($urandom % 256) - 128; w_data = 8'(wt[a]);
      end
      @(negedge clk); w_we = 0;
      for (int o = 0; o < NO; o++) begin
        @(negedge clk); b_we = 1; b_addr = 3'(o); bs[o] = int'($urandom % 2000) - 1000;
        b_data = 16'(bs[o]);
      end
      @(negedge clk); b_we = 0;
      for (int t = 0; t < 5; t++) begin
        int cyc;
        for (int i = 0; i < NI; i++) in_map[i] = ($urandom % 2) == 0;
        @(negedge clk); start = 1; t_first = (t == 0);
        @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != NO * (NI + 2) + 1) begin
          failures++; $display("FAIL cycles %0d", cyc);
        end
        for (int o = 0; o < NO; o++) begin
          longint s;
          s = bs[o];
          for (int i = 0; i < NI; i++) if (in_map[i]) s += weff(wt[o * NI + i], int'(prec));
          sc[o] = (t == 0) ? s : sc[o] + s;
          checks++;
          if (longint'(scores[o]) != sc[o]) begin
            failures++; $display("FAIL run %0d t %0d class %0d: %0d want %0d", run, t, o, scores[o], sc[o]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
