// tb_syn_mul: checks the synapse multiplier at all four weight precisions, with
// spike activations (ACT_W = 2, as the layers use it) and 8-bit activations.
module tb_syn_mul;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  int checks = 0, failures = 0;
  prec_e prec;
  logic signed [1:0]  a2;
  logic signed [7:0]  a8, w;
  logic signed [9:0]  p2;
  logic signed [15:0] p8;

  syn_mul #(.ACT_W(2)) dut2 (.prec(prec), .act(a2), .weight(w), .product(p2));
  syn_mul #(.ACT_W(8)) dut8 (.prec(prec), .act(a8), .weight(w), .product(p8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pr = 0; pr < 4; pr++) begin
      for (int wi = -128; wi < 128; wi++) begin
        for (int s = 0; s < 2; s++) begin
          prec = prec_e'(pr);
          w    = 8'(wi);
          a2   = 2'(s);
          a8   = 8'($urandom);
          #1;
          checks++;
          if (int'(p2) != s * weff(wi, pr)) begin
            failures++;
            $display("FAIL prec=%0d w=%0d spike=%0d got %0d", pr, wi, s, p2);
          end
          checks++;
          if (int'(p8) != int'(a8) * weff(wi, pr)) begin
            failures++;
            $display("FAIL prec=%0d w=%0d act=%0d got %0d", pr, wi, a8, p8);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
