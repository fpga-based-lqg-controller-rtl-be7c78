// tb_hil_noise_gen: self-checking test of the Gaussian noise source.
//
// A behavioural LFSR model (Galois, x^24+x^23+x^22+x^17+1, 24 steps per sample) is run in
// step with the DUT and the register value is compared exactly after each step. The noise
// value is compared with a real-number Box-Muller evaluation of the same LFSR bits
// (tolerance 0.01), and after 20000 samples the mean (|m| < 0.05) and the variance
// (0.9 .. 1.1) of xi are checked. Steps are issued at irregular intervals; inputs are
// driven on the falling clock edge.
`timescale 1ns/1ps
module tb_hil_noise_gen;
  import hil_pkg::*;
  logic clk = 0, rst, step;
  sig_t xi;
  logic [23:0] lfsr_state;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_noise_gen dut (.clk, .rst, .step, .xi, .lfsr_state);

  function automatic logic [23:0] model_step(logic [23:0] s);
    for (int i = 0; i < 24; i++) s = s[0] ? ((s >> 1) ^ 24'hE10000) : (s >> 1);
    return s;
  endfunction

  initial begin
    logic [23:0] m;
    real sum1 = 0, sum2 = 0, e, g, u1, u2;
    int n = 20000;
    rst = 1; step = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    m = 24'hACE1F3;
    checks++; if (lfsr_state !== m) failures++;
    for (int k = 0; k < n; k++) begin
      @(negedge clk); step = 1;
      @(negedge clk); step = 0;
      m = model_step(m);
      checks++;
      if (lfsr_state !== m) begin failures++; if (failures < 5) $display("lfsr mismatch %h %h", lfsr_state, m); end
      repeat (4 + $urandom_range(0, 3)) @(negedge clk);
      u1 = (real'(m[23:14]) + 0.5) / 1024.0;
      u2 = (real'(m[9:0]) + 0.5) / 1024.0;
      e = $sqrt(-2.0 * $ln(u1)) * ($cos(2.0 * 3.14159265358979 * u2) + $sin(2.0 * 3.14159265358979 * u2)) / $sqrt(2.0);
      g = real'(xi) / 131072.0;
      checks++;
      if (g - e > 0.01 || e - g > 0.01) begin failures++; if (failures < 5) $display("xi mismatch %f %f", g, e); end
      sum1 += g; sum2 += g * g;
    end
    sum1 /= n; sum2 = sum2 / n - sum1 * sum1;
    $display("mean %f var %f", sum1, sum2);
    checks++; if (sum1 > 0.05 || sum1 < -0.05) failures++;
    checks++; if (sum2 > 1.1 || sum2 < 0.9) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
