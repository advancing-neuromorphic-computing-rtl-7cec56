// tb_spike_encoder: for every 8-bit value, checks the number of rate-code spikes over
// T steps (floor(T*x/256)) and that the latency code fires exactly once, at step
// floor((255-x)*T/256), and never for x = 0.
module tb_spike_encoder;
  import snn_pkg::*;

  localparam int T = 8;
  int checks = 0, failures = 0;
  code_e code;
  logic [7:0] x;
  logic [2:0] t;
  logic spike;

  spike_encoder #(.T_STEPS(T)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int xv = 0; xv < 256; xv++) begin
      int n_rate, n_lat, when;
      n_rate = 0; n_lat = 0; when = -1;
      x = 8'(xv);
      for (int tv = 0; tv < T; tv++) begin
        t = 3'(tv);
        code = CODE_RATE;    #1; n_rate += spike;
        code = CODE_LATENCY; #1;
        if (spike) begin n_lat++; when = tv; end
      end
      checks++;
      if (n_rate != (T * xv) / 256) begin
        failures++; $display("FAIL rate x=%0d spikes=%0d", xv, n_rate);
      end
      checks++;
      if (xv == 0 ? (n_lat != 0) : (n_lat != 1 || when != ((255 - xv) * T) / 256)) begin
        failures++; $display("FAIL latency x=%0d n=%0d at %0d", xv, n_lat, when);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
