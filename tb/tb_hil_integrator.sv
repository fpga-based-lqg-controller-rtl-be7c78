// tb_hil_integrator: self-checking test of the slice integrator.
//
// A bit-exact integer model of the two paths (Adams-Bashforth velocity update, trapezoidal
// position update, kappa * 2**lambda step scaling, 47-bit accumulators with wrap-around,
// rescaling by kappa_qd * 2**lambda_qd and kappa_q * 2**lambda_q, 25-bit saturation) runs
// alongside the DUT. For each sample a start pulse is given with a random qdd; the test
// checks that done rises exactly 9 clocks later and that qd and q then equal the model.
// Random configurations (including negative lambda and rescaling shifts) are used, with
// clear pulses between them. A final open-loop run with constant acceleration checks
// q against a*(n*t_s)^2/2 within 2 %. Inputs are driven on the falling clock edge.
`timescale 1ns/1ps
module tb_hil_integrator;
  import hil_pkg::*;
  logic clk = 0, clear, start, done;
  sig_t qdd, qd, q;
  slice_cfg_t cfg;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_integrator dut (.clk, .clear, .start, .qdd, .cfg, .qd, .q, .done);

  longint m_prev, m_hist, m_accv, m_accq, m_q, m_qd;

  function automatic longint sat25(longint v);
    if (v > 64'sd16777215) return 64'sd16777215;
    if (v < -64'sd16777216) return -64'sd16777216;
    return v;
  endfunction
  function automatic longint wrap47(longint v);
    return (v <<< 17) >>> 17;
  endfunction
  function automatic longint shs(longint v, int s);
    return s >= 0 ? (v <<< s) : (v >>> (-s));
  endfunction

  task automatic model_clear();
    m_prev = 0; m_hist = 0; m_accv = 0; m_accq = 0; m_q = 0; m_qd = 0;
  endtask
  task automatic model_step(longint a);
    longint v1, pv, wv, qn, p1, pp, wq;
    v1 = a + ((a - m_prev) >>> 1);
    m_prev = a;
    pv = v1 * longint'(cfg.kappa);
    m_accv = wrap47(m_accv + wrap47(shs(pv <<< 12, int'(cfg.lambda))));
    wv = sat25(shs(m_accv, int'(cfg.lambda_qd)) >>> 22);
    qn = sat25((wv * longint'(cfg.kappa_qd)) >>> 10);
    p1 = (qn + m_hist) >>> 1;
    m_hist = qn;
    pp = p1 * longint'(cfg.kappa);
    m_accq = wrap47(m_accq + wrap47(shs(pp <<< 12, int'(cfg.lambda))));
    wq = sat25(shs(m_accq, int'(cfg.lambda_q)) >>> 22);
    m_q = sat25((wq * longint'(cfg.kappa_q)) >>> 10);
    m_qd = m_hist;
  endtask

  task automatic sample(longint a);
    int lat;
    @(negedge clk);
    qdd = sig_t'(a); start = 1;
    @(negedge clk);
    start = 0;
    model_step(longint'(qdd));
    lat = 0;
    while (!done && lat < 20) begin @(negedge clk); lat++; end  // counts edges after the sampling edge
    checks++;
    if (lat != 9) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (longint'(q) != m_q || longint'(qd) != m_qd) begin
      failures++;
      if (failures < 6) $display("q %0d/%0d qd %0d/%0d", q, m_q, qd, m_qd);
    end
    repeat ($urandom_range(0, 3)) @(negedge clk);
  endtask

  initial begin
    clear = 1; start = 0; qdd = '0; cfg = '0;
    repeat (3) @(negedge clk);
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      clear = 1;
      cfg.kappa     = kconst_t'($urandom_range(256, 2047));
      cfg.lambda    = shift_t'(-int'($urandom_range(0, 12)));
      cfg.kappa_qd  = kconst_t'($urandom_range(0, 4095)) - 18'sd2048;
      cfg.lambda_qd = shift_t'(int'($urandom_range(0, 8)) - 4);
      cfg.kappa_q   = kconst_t'($urandom_range(0, 4095)) - 18'sd2048;
      cfg.lambda_q  = shift_t'(int'($urandom_range(0, 8)) - 6);
      model_clear();
      @(negedge clk);
      clear = 0;
      for (int n = 0; n < 60; n++)
        sample((c % 4 == 0) ? longint'(sig_t'($urandom)) : longint'($urandom_range(0, 262143)) - 131072);
    end
    // open loop, constant acceleration 0.5, t_s = 2^-6, unity rescaling
    @(negedge clk);
    clear = 1;
    cfg.kappa = 18'sd1024; cfg.lambda = -6; cfg.kappa_qd = 18'sd1024; cfg.lambda_qd = 0;
    cfg.kappa_q = 18'sd1024; cfg.lambda_q = 0;
    model_clear();
    @(negedge clk);
    clear = 0;
    for (int n = 1; n <= 100; n++) sample(65536);
    begin
      real e, g;
      e = 0.5 * 0.5 * (100.0 / 64.0) ** 2;
      g = real'(q) / 131072.0;
      $display("open loop q %f expected %f", g, e);
      checks++;
      if (g > e * 1.02 || g < e * 0.98) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
