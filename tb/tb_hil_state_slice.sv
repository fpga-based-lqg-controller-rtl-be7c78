// tb_hil_state_slice: self-checking test of one state slice (NLFs + integrator).
//
// The slice is started every 36 clocks, as in the simulator. A bit-exact integer model
// computes qdd = sat((u_f*h(z) + x_f*g(q) + xd_f*f(qd)) >> 10) from the model's own previous
// q, qd, then advances a copy of the integrator model; the DUT's q, qd at `done` must match
// exactly, and done must come 35 clocks after the sampling edge (one slice period).
// Part 1: all NLFs bypassed (identity), random factors and z, including a damped oscillator
// setting (x_f < 0, xd_f < 0). Part 2: the u NLF gets a primary table of 0 and an alternate
// table of 0.5, loaded through the table-write port, and alt_sel[0] toggles randomly per
// sample, so h(z) is 0 or 0.5 depending on the selected table.
`timescale 1ns/1ps
module tb_hil_state_slice;
  import hil_pkg::*;
  logic clk = 0, clear, start, done;
  sig_t z, q, qd, qdd_mon;
  slice_cfg_t cfg;
  nlf_cfg_t [2:0] nlf_cfg;
  logic [2:0] alt_sel;
  tw_t tw;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_state_slice #(.NLF_BASE(NLF_SL0)) dut (.clk, .clear, .start, .z, .cfg, .nlf_cfg, .alt_sel,
                                             .tw, .q, .qd, .qdd_mon, .done);

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
  task automatic model_int(longint a);
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

  task automatic sample(longint zv, bit use_tab);
    int lat;
    longint h, a;
    @(negedge clk);
    z = sig_t'(zv); start = 1;
    if (use_tab) alt_sel = {2'b00, 1'($urandom)};
    h = use_tab ? (alt_sel[0] ? 64'sd65536 : 64'sd0) : longint'(z);
    a = sat25((longint'(cfg.u_factor) * h + longint'(cfg.x_factor) * m_q
               + longint'(cfg.xdot_factor) * m_qd) >>> 10);
    model_int(a);
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done && lat < 60) begin @(negedge clk); lat++; end
    checks++;
    if (lat != SLICE_PERIOD - 1) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (longint'(q) != m_q || longint'(qd) != m_qd) begin
      failures++;
      if (failures < 6) $display("q %0d/%0d qd %0d/%0d", q, m_q, qd, m_qd);
    end
  endtask

  task automatic restart();
    @(negedge clk);
    clear = 1;
    model_clear();
    @(negedge clk);
    clear = 0;
  endtask

  initial begin
    real peak;
    clear = 1; start = 0; z = '0; cfg = '0; tw = '0; alt_sel = '0;
    for (int n = 0; n < 3; n++) begin
      nlf_cfg[n].bypass = 1'b1; nlf_cfg[n].in_scale = 18'sd1024; nlf_cfg[n].out_scale = 18'sd1024;
    end
    repeat (3) @(negedge clk);
    // random configurations
    for (int c = 0; c < 20; c++) begin
      cfg.kappa = kconst_t'($urandom_range(256, 2047));  cfg.lambda = shift_t'(-int'($urandom_range(4, 10)));
      cfg.kappa_qd = kconst_t'($urandom_range(512, 2047)); cfg.lambda_qd = shift_t'(int'($urandom_range(0, 4)) - 2);
      cfg.kappa_q = kconst_t'($urandom_range(512, 2047));  cfg.lambda_q = shift_t'(int'($urandom_range(0, 4)) - 2);
      cfg.u_factor = kconst_t'($urandom_range(0, 4095)) - 18'sd2048;
      cfg.x_factor = -kconst_t'($urandom_range(0, 2047));
      cfg.xdot_factor = -kconst_t'($urandom_range(0, 1023));
      restart();
      for (int n = 0; n < 40; n++) sample(longint'($urandom_range(0, 262143)) - 131072, 0);
    end
    // lightly damped oscillator driven by a step: must oscillate
    cfg.kappa = 18'sd1024; cfg.lambda = -4; cfg.kappa_qd = 18'sd1024; cfg.lambda_qd = 0;
    cfg.kappa_q = 18'sd1024; cfg.lambda_q = 0;
    cfg.u_factor = 18'sd1024; cfg.x_factor = -18'sd1024; cfg.xdot_factor = -18'sd20;
    restart();
    peak = 0;
    for (int n = 0; n < 150; n++) begin
      sample(13107, 0);
      if (real'(q) / 131072.0 > peak) peak = real'(q) / 131072.0;
    end
    $display("step response peak %f (static 0.1)", peak);
    checks++;
    if (peak < 0.15 || peak > 0.21) failures++;
    // alternate-table switching on the u NLF
    for (int e = 0; e < 1024; e++) begin
      @(negedge clk);
      tw.en = 1; tw.nlf = 5'(NLF_SL0); tw.alt = 0; tw.addr = 10'(e); tw.data = 16'sd0;
      @(negedge clk);
      tw.alt = 1; tw.data = 16'sd8192;
    end
    @(negedge clk);
    tw.en = 0;
    nlf_cfg[0].bypass = 1'b0;
    restart();
    for (int n = 0; n < 200; n++) sample(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
