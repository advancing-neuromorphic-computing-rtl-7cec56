// tb_accu: random load / add sequences against a saturating integer model,
// including runs that drive the sum into both saturation limits.
module tb_accu;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  int checks = 0, failures = 0, sat_hits = 0;
  logic clk = 0, rst_n = 0, load = 0, add = 0;
  logic signed [15:0] bias = 0;
  logic signed [21:0] addend = 0;
  logic signed [23:0] sum;
  longint model;

  accu #(.IN_W(22)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (sum != 0) begin failures++; $display("FAIL reset sum=%0d", sum); end
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      load   = ($urandom % 16) == 0;
      add    = ($urandom % 4) != 0;
      bias   = 16'($urandom);
      // mostly large positive or negative runs so that both limits are reached
      addend = (k % 1000 < 500) ? 22'(($urandom % 2000000)) : -22'(($urandom % 2000000));
      if (($urandom % 3) == 0) addend = 22'($urandom);
      @(posedge clk);
      if (load) model = bias;
      else if (add) begin
        model = model + addend;
        if (model > 8388607 || model < -8388608) sat_hits++;
        model = sat(model, 24);
      end
      #1;
      checks++;
      if (longint'(sum) != model) begin
        failures++;
        $display("FAIL step %0d: sum=%0d model=%0d", k, sum, model);
      end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("saturations: %0d", sat_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
