// tb_lif_thres: random LIF updates against the integer model, plus directed cases
// for firing at exactly the threshold, the refractory countdown and no-leak mode.
module tb_lif_thres;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  int checks = 0, failures = 0, fires = 0, refr = 0;
  lif_params_t prm;
  logic signed [15:0] v_in, v_out;
  logic [3:0] ref_in, ref_out;
  logic signed [23:0] current;
  logic spike;

  lif_thres dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    int v, r;
    bit s;
    v = v_in; r = ref_in;
    s = lif(v, r, current, prm.v_th, prm.v_rest, prm.leak_shift, prm.t_ref);
    #1;
    checks++;
    if (spike !== s || int'(v_out) != v || int'(ref_out) != r) begin
      failures++;
      $display("FAIL v=%0d r=%0d I=%0d th=%0d rest=%0d ls=%0d: got (%0d,%0d,%0d) want (%0d,%0d,%0d)",
               v_in, ref_in, current, prm.v_th, prm.v_rest, prm.leak_shift,
               spike, v_out, ref_out, s, v, r);
    end
    if (s) fires++;
    if (ref_in != 0) refr++;
  endtask

  initial begin
    // directed: exactly at threshold fires
    prm = '{v_th: 16'sd100, v_rest: 16'sd0, leak_shift: 4'd0, t_ref: 4'd3};
    v_in = 16'sd60; ref_in = 0; current = 24'sd40;
    #1; checks++;
    if (!spike || v_out != 0 || ref_out != 3) begin failures++; $display("FAIL threshold case"); end
    // one below threshold holds
    current = 24'sd39;
    #1; checks++;
    if (spike || v_out != 99) begin failures++; $display("FAIL sub-threshold case"); end
    // refractory ignores input
    ref_in = 2; current = 24'sd1000;
    #1; checks++;
    if (spike || v_out != 0 || ref_out != 1) begin failures++; $display("FAIL refractory case"); end
    // leak with shift 1 toward rest 10: v 50 -> 50 - 20 = 30
    prm.leak_shift = 1; prm.v_rest = 16'sd10; ref_in = 0; v_in = 16'sd50; current = 0;
    #1; checks++;
    if (v_out != 30) begin failures++; $display("FAIL leak case got %0d", v_out); end
    for (int k = 0; k < 20000; k++) begin
      prm.v_th       = 16'($urandom % 4000) - 16'sd500;
      prm.v_rest     = 16'($urandom % 400) - 16'sd200;
      prm.leak_shift = 4'($urandom % 8);
      prm.t_ref      = 4'($urandom % 5);
      v_in           = 16'($urandom);
      if (k % 2 == 0) v_in = 16'($urandom % 4000) - 16'sd1000;
      ref_in         = ($urandom % 4 == 0) ? 4'($urandom % 5) : 4'd0;
      current        = 24'($urandom % 3000) - 24'sd1000;
      if (k % 50 == 0) current = 24'($urandom);
      check_one();
    end
    checks++;
    if (fires == 0 || refr == 0) begin failures++; $display("FAIL coverage fires=%0d refr=%0d", fires, refr); end
    $display("fires=%0d refractory=%0d", fires, refr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
