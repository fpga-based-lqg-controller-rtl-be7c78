// tb_lqg_engine: self-checking test of the LQG sample engine.
//
// Random parameter sets (shift exponents 10..20 so that both normal and saturating values
// occur) and random detection inputs chi are applied; the shared bit-exact model
// (lqg_model.svh) computes u[n] = -Kd xi[n] and xi[n+1] = (Ad - Ld C) xi[n] + Bd u[n] + Ld chi[n].
// chi is changed in the clock before each sample start; eight clocks later u, chi_s and the
// state vector must equal the model. Feedback enable is toggled at random (u must then be
// zero and the state must see u = 0), the clear input is pulsed (state and u to zero), and
// sample_start/sample_end must come every 8 clocks.
`timescale 1ns/1ps
module tb_lqg_engine;
  import lqg_pkg::*;
  `include "lqg_model.svh"
  logic clk = 0, rst, clear, fb_en, sample_start, sample_end;
  lqg_set_t params;
  uw_t [N_Y-1:0] chi, chi_s;
  uw_t [N_U-1:0] u;
  xw_t [N_X-1:0] xi;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_engine dut (.clk, .rst, .clear, .fb_en, .params, .chi, .u, .xi, .chi_s, .sample_start,
                  .sample_end);

  longint xs [7], uo [2], cv [2];

  initial begin
    int gap;
    rst = 1; clear = 0; fb_en = 0; chi = '0; params = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 7; c++) xs[c] = 0;
    for (int set = 0; set < 30; set++) begin
      params = mdl_random_set(10, 20);
      for (int n = 0; n < 40; n++) begin
        while (!sample_start) @(negedge clk);
        // sample_start is high in this clock: chi is taken at the coming edge
        for (int c = 0; c < 2; c++) begin chi[c] = uw_t'($urandom); cv[c] = longint'(chi[c]); end
        if (n % 8 == 0) fb_en = 1'($urandom);
        if (set % 5 == 4 && n == 20) begin
          clear = 1;
          for (int c = 0; c < 7; c++) xs[c] = 0;
        end else begin
          clear = 0;
          mdl_sample(params, fb_en, cv, xs, uo);
        end
        gap = 0;
        @(negedge clk); gap++;
        clear = 0;
        while (!sample_start) begin @(negedge clk); gap++; end
        checks++;
        if (gap != SAMPLE_DIV) begin failures++; $display("sample period %0d", gap); end
        checks++;
        for (int c = 0; c < 7; c++)
          if (longint'(xi[c]) != xs[c]) begin
            failures++;
            if (failures < 8) $display("set %0d n %0d xi[%0d] %0d exp %0d", set, n, c, xi[c], xs[c]);
            break;
          end
        if (!(set % 5 == 4 && n == 20)) begin
          checks++;
          if (longint'(u[0]) != uo[0] || longint'(u[1]) != uo[1] || chi_s != chi) begin
            failures++;
            if (failures < 8) $display("u %0d/%0d %0d/%0d", u[0], uo[0], u[1], uo[1]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
