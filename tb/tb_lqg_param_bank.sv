// tb_lqg_param_bank: self-checking test of the two parameter sets.
//
// A reference keeps staging and active copies of both sets. Random words are written to
// random addresses of random sets, commits and set selections are issued at random times,
// and sample_end pulses every 8 clocks. Every clock the DUT output must equal the reference
// active set selected by the reference selection: a written word must not reach the engine
// before a commit and a sample boundary, a commit must move the whole staging set at once,
// and a selection change must take effect only at a sample boundary. Counts of commits and
// switches that actually changed the output are checked to be non-zero.
`timescale 1ns/1ps
module tb_lqg_param_bank;
  import lqg_pkg::*;
  `include "lqg_model.svh"
  logic clk = 0, rst, we, wset, sel, sample_end, active_sel;
  logic [6:0] waddr;
  logic [23:0] wdata;
  logic [1:0] commit;
  lqg_set_t params;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_param_bank dut (.clk, .rst, .we, .wset, .waddr, .wdata, .commit, .sel, .sample_end,
                      .params, .active_sel);

  lqg_set_t st [2], ac [2];
  logic [1:0] pend;
  logic rsel;

  function automatic lqg_set_t put(lqg_set_t p, int a, logic [23:0] d);
    if (a < 49) p.m[a / 7][a % 7] = '{res: d[17:0], sh: d[22:18]};
    else if (a < 63) p.b[(a - 49) / 2][(a - 49) % 2] = '{res: d[17:0], sh: d[22:18]};
    else if (a < 77) p.l[(a - 63) / 2][(a - 63) % 2] = '{res: d[17:0], sh: d[22:18]};
    else if (a < 91) p.k[(a - 77) / 7][(a - 77) % 7] = '{res: d[17:0], sh: d[23:18]};
    return p;
  endfunction

  initial begin
    int cyc, ncommit, nswitch;
    lqg_set_t prev;
    rst = 1; we = 0; wset = 0; waddr = 0; wdata = 0; commit = 0; sel = 0; sample_end = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    st[0] = '0; st[1] = '0; ac[0] = '0; ac[1] = '0; pend = 0; rsel = 0;
    ncommit = 0; nswitch = 0;
    for (cyc = 0; cyc < 20000; cyc++) begin
      // drive
      we = 1'($urandom_range(0, 3) != 0);
      wset = 1'($urandom); waddr = 7'($urandom_range(0, 95)); wdata = 24'($urandom);
      commit = ($urandom_range(0, 30) == 0) ? 2'($urandom_range(1, 3)) : 2'b00;
      if ($urandom_range(0, 100) == 0) sel = ~sel;
      sample_end = (cyc % 8 == 7);
      prev = params;
      @(negedge clk);
      // reference update for the edge just taken
      begin
        lqg_set_t st_old [2];
        st_old = st;
        if (we) st[wset] = put(st[wset], int'(waddr), wdata);
        if (sample_end) begin
          for (int s = 0; s < 2; s++) if (pend[s] || commit[s]) begin ac[s] = st_old[s]; ncommit++; end
          pend = 0;
          rsel = sel;
        end else pend |= commit;
      end
      checks++;
      if (params !== ac[rsel] || active_sel !== rsel) begin
        failures++;
        if (failures < 6) $display("cycle %0d: output differs from reference", cyc);
      end
      if (params != prev && !sample_end) begin
        checks++; failures++; $display("output changed outside a sample boundary");
      end
      if (params != prev) nswitch++;
    end
    $display("commits %0d, output changes %0d", ncommit, nswitch);
    checks++; if (ncommit < 10 || nswitch < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
