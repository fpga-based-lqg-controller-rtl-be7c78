// tb_hil_input_mapping: self-checking test of the simulator input mapping.
//
// Phase 1 keeps both alpha NLFs in bypass and streams random inputs u, xi and random
// weights a, b; every clock z is compared with the integer model
// z_j = sat((a_j0*alpha_0 + a_j1*alpha_1 + b_j*xi_j) >> 10), alpha_i = u_i << 5, using the
// inputs applied 18 clocks (u) and 6 clocks (xi) earlier. Phase 2 loads a constant 0.5 table
// into alpha_1 only (through the table-write port, NLF number 1) and enables it; alpha_1 is
// then 0.5 whatever u_1 is (tolerance 4 LSB), which also checks the table-write decoding.
// Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_hil_input_mapping;
  import hil_pkg::*;
  logic clk = 0;
  io_t      [N_IN-1:0] u;
  sig_t     [N_ST-1:0] xi, z;
  kconst_t  [N_ST-1:0][N_IN-1:0] a;
  kconst_t  [N_ST-1:0] b;
  nlf_cfg_t [N_IN-1:0] nlf_cfg;
  tw_t tw;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_input_mapping dut (.clk, .u, .xi, .a, .b, .nlf_cfg, .tw, .z);

  typedef longint vec_t [N_IN];
  typedef longint xv_t [N_ST];
  vec_t hu[$];
  xv_t  hx[$];

  function automatic longint sat25(longint v);
    if (v > 64'sd16777215) return 64'sd16777215;
    if (v < -64'sd16777216) return -64'sd16777216;
    return v;
  endfunction

  task automatic run(int n, bit tab1);
    for (int k = 0; k < n + 18; k++) begin
      vec_t uv; xv_t xv;
      @(negedge clk);
      if (k >= 30) begin
        for (int j = 0; j < N_ST; j++) begin
          longint al0, al1, e, tol;
          al0 = hu[hu.size() - 18][0] <<< 5;
          al1 = tab1 ? 65536 : (hu[hu.size() - 18][1] <<< 5);
          e = sat25((longint'(a[j][0]) * al0 + longint'(a[j][1]) * al1
                     + longint'(b[j]) * hx[hx.size() - 6][j]) >>> 10);
          tol = tab1 ? 4 * (a[j][1] < 0 ? -a[j][1] : a[j][1]) / 1024 + 2 : 0;
          checks++;
          if (longint'(z[j]) - e > tol || e - longint'(z[j]) > tol) begin
            failures++;
            if (failures < 6) $display("k=%0d j=%0d got %0d exp %0d", k, j, z[j], e);
          end
        end
      end
      for (int i = 0; i < N_IN; i++) begin
        u[i] = io_t'($urandom); uv[i] = longint'(u[i]);
      end
      for (int j = 0; j < N_ST; j++) begin
        xi[j] = sig_t'($urandom); xv[j] = longint'(xi[j]);
      end
      hu.push_back(uv); hx.push_back(xv);
    end
  endtask

  initial begin
    tw = '0; u = '0; xi = '0;
    for (int i = 0; i < N_IN; i++) begin
      nlf_cfg[i].bypass = 1'b1; nlf_cfg[i].in_scale = 18'sd1024; nlf_cfg[i].out_scale = 18'sd1024;
    end
    for (int j = 0; j < N_ST; j++) begin
      b[j] = kconst_t'($urandom);
      for (int i = 0; i < N_IN; i++) a[j][i] = kconst_t'($urandom);
    end
    run(500, 0);
    // small weights so that nothing saturates, then random large ones again
    for (int j = 0; j < N_ST; j++) begin
      b[j] = kconst_t'($urandom_range(0, 4096)) - 18'sd2048;
      for (int i = 0; i < N_IN; i++) a[j][i] = kconst_t'($urandom_range(0, 4096)) - 18'sd2048;
    end
    run(500, 0);
    // constant 0.5 table into alpha_1
    for (int e = 0; e < 1024; e++) begin
      @(negedge clk);
      tw.en = 1; tw.nlf = 5'(NLF_IN0 + 1); tw.alt = 0; tw.addr = 10'(e); tw.data = 16'sd8192;
    end
    @(negedge clk);
    tw.en = 1; tw.nlf = 5'(NLF_OUT0); tw.addr = 0; tw.data = 16'sd100;  // another NLF: no effect
    @(negedge clk);
    tw.en = 0;
    nlf_cfg[1].bypass = 1'b0;
    run(500, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
