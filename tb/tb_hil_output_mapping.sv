// tb_hil_output_mapping: self-checking test of the simulator output mapping.
//
// Phase 1 keeps all six beta NLFs in bypass, streams random q, qd, random selects and random
// weights d, and compares every output sample with the integer model
// y_k = sat14((sum_j d_kj * (sel_kj ? qd_j : q_j)) >> 15) using the states applied 19
// clocks earlier. Phase 2 uses small weights (no saturation). Phase 3 loads a constant 0.25
// table into beta_{j=2,k=1} through the table-write port and enables it (tolerance 2 LSB).
// Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_hil_output_mapping;
  import hil_pkg::*;
  logic clk = 0;
  sig_t     [N_ST-1:0] q, qd;
  kconst_t  [N_OUT-1:0][N_ST-1:0] d;
  logic     [N_OUT-1:0][N_ST-1:0] out_sel;
  nlf_cfg_t [N_ST*N_OUT-1:0] nlf_cfg;
  tw_t tw;
  io_t [N_OUT-1:0] y;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_output_mapping dut (.clk, .q, .qd, .d, .out_sel, .nlf_cfg, .tw, .y);

  typedef longint sv_t [N_OUT][N_ST];     // selected state per pair
  sv_t hs[$];

  function automatic longint sat14(longint v);
    if (v > 64'sd8191) return 64'sd8191;
    if (v < -64'sd8192) return -64'sd8192;
    return v;
  endfunction

  task automatic run(int n, bit tab);
    for (int k = 0; k < n + 19; k++) begin
      sv_t sv;
      @(negedge clk);
      if (k >= 30) begin
        for (int o = 0; o < N_OUT; o++) begin
          longint acc = 0, e;
          for (int j = 0; j < N_ST; j++)
            acc += longint'(d[o][j]) * ((tab && o == 1 && j == 2) ? 64'sd32768 : hs[hs.size() - 19][o][j]);
          e = sat14(acc >>> 15);
          checks++;
          if (longint'(y[o]) - e > 2 || e - longint'(y[o]) > 2 || (!tab && longint'(y[o]) != e)) begin
            failures++;
            if (failures < 6) $display("k=%0d o=%0d got %0d exp %0d", k, o, y[o], e);
          end
        end
      end
      for (int j = 0; j < N_ST; j++) begin
        q[j] = sig_t'($urandom); qd[j] = sig_t'($urandom);
      end
      out_sel = 6'($urandom);
      for (int o = 0; o < N_OUT; o++)
        for (int j = 0; j < N_ST; j++) sv[o][j] = out_sel[o][j] ? longint'(qd[j]) : longint'(q[j]);
      hs.push_back(sv);
    end
  endtask

  initial begin
    tw = '0; q = '0; qd = '0; out_sel = '0;
    for (int i = 0; i < N_ST*N_OUT; i++) begin
      nlf_cfg[i].bypass = 1'b1; nlf_cfg[i].in_scale = 18'sd1024; nlf_cfg[i].out_scale = 18'sd1024;
    end
    for (int o = 0; o < N_OUT; o++)
      for (int j = 0; j < N_ST; j++) d[o][j] = kconst_t'($urandom);
    run(500, 0);
    for (int o = 0; o < N_OUT; o++)
      for (int j = 0; j < N_ST; j++) d[o][j] = kconst_t'($urandom_range(0, 1024)) - 18'sd512;
    run(500, 0);
    for (int e = 0; e < 1024; e++) begin
      @(negedge clk);
      tw.en = 1; tw.nlf = 5'(NLF_OUT0 + N_ST*1 + 2); tw.alt = 0; tw.addr = 10'(e); tw.data = 16'sd4096;
    end
    @(negedge clk);
    tw.en = 0;
    nlf_cfg[N_ST*1 + 2].bypass = 1'b0;
    run(500, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
