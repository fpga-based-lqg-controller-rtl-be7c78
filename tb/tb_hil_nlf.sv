// tb_hil_nlf: loads a primary table f(x) = 0.9 sin(pi x) and an alternate table
// f(x) = -0.5 x + 0.25, streams random inputs in [-1, 1), and compares each output with
// the linear interpolation of the table worked out here in real arithmetic, taken from the
// input applied exactly 12 clocks earlier. Also checks the input and output scale factors,
// the alternate-table select, bypass (delayed input) and the clamped last entry.
module tb_hil_nlf;
  import hil_pkg::*;
  logic clk = 0;
  always #2 clk = ~clk;
  sig_t x, y;
  nlf_cfg_t cfg;
  logic alt_sel, tw_en, tw_alt;
  logic [9:0] tw_addr;
  lut_t tw_data;
  int checks = 0, failures = 0;
  real tab [2][1024];

  hil_nlf #(.AW(10), .HAS_ALT(1'b1)) dut (.clk, .x, .y, .cfg, .alt_sel, .tw_en, .tw_alt,
                                          .tw_addr, .tw_data);

  // expected output for input xv (signal units), table t, scales in/out (real factors)
  function automatic real expect_y(real xv, int t, real sin_, real sout, bit byp);
    real n, pos, fr, f0, f1;
    int i;
    if (byp) return xv;
    n = xv * sin_;
    if (n >= 1.0 - 2.0 ** -24) n = 1.0 - 2.0 ** -24;
    if (n < -1.0) n = -1.0;
    pos = (n + 1.0) * 512.0;
    i = int'($floor(pos));
    fr = pos - real'(i);
    f0 = tab[t][i];
    f1 = (i == 1023) ? f0 : tab[t][i + 1];
    return (f0 + (f1 - f0) * fr) * sout;
  endfunction

  real  hx [$];
  int   ht [$];
  real  hin [$], hout [$];
  bit   hb [$];

  task automatic run(int n, real sin_, real sout, bit byp, int altmode, real tol, real xmax);
    cfg.in_scale  = kconst_t'($rtoi(sin_ * 1024.0));
    cfg.out_scale = kconst_t'($rtoi(sout * 1024.0));
    cfg.bypass    = byp;
    hx.delete(); ht.delete(); hin.delete(); hout.delete(); hb.delete();
    for (int k = 0; k < n + 12; k++) begin
      real xv;
      @(negedge clk);
      // y now holds the result for the input applied 12 clocks ago
      if (hx.size() >= 12 && k >= 24) begin
        real e, g;
        int idx;
        idx = hx.size() - 12;
        e = expect_y(hx[idx], ht[idx], real'(cfg.in_scale) / 1024.0, real'(cfg.out_scale) / 1024.0, byp);
        g = real'(y) / 131072.0;
        checks++;
        if (g > e + tol || g < e - tol) begin
          failures++;
          if (failures < 6) $display("mismatch k=%0d x=%f alt=%0d got %f exp %f", k, hx[idx], ht[idx], g, e);
        end
      end
      xv = ($urandom_range(0, 2000000) / 1000000.0 - 1.0) * xmax;
      if (k == 5) xv = xmax;                     // last-entry clamp
      x = sig_t'($rtoi(xv * 131072.0));
      alt_sel = (altmode == 2) ? 1'($urandom) : 1'(altmode);
      hx.push_back(real'(x) / 131072.0); ht.push_back(int'(alt_sel));
    end
  endtask

  initial begin
    tw_en = 0; tw_alt = 0; tw_addr = 0; tw_data = 0; alt_sel = 0; x = 0;
    cfg = '{in_scale: 18'sd1024, out_scale: 18'sd1024, bypass: 1'b0};
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < 1024; i++) begin
        real xi, f;
        xi = -1.0 + real'(i) / 512.0;
        f  = (t == 0) ? 0.9 * $sin(3.14159265358979 * xi) : -0.5 * xi + 0.25;
        @(negedge clk);
        tw_en = 1; tw_alt = 1'(t); tw_addr = 10'(i);
        tw_data = lut_t'($rtoi($floor(f * 16384.0 + 0.5)));
        tab[t][i] = real'(tw_data) / 16384.0;
      end
    @(negedge clk);
    tw_en = 0;
    run(600, 1.0, 1.0, 0, 0, 2.0e-4, 1.0);     // primary table
    run(600, 1.0, 1.0, 0, 2, 2.0e-4, 1.0);     // switching tables every clock
    run(600, 0.25, 3.0, 0, 1, 6.0e-4, 4.0);    // scaled input and output
    run(300, 1.0, 1.0, 1, 0, 1.0e-9, 50.0);    // bypass
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
