// tb_hil_simulator: self-checking test of the complete HIL simulator core, configured only
// through its register bus, as software would.
//
// 1. Slice 0 is set up as a damped oscillator driven by ADC input 0 (a_00 = 1, all NLFs
//    bypassed, no noise), DAC output 0 shows q_0 (d_00 = 1). A constant ADC value is applied;
//    a bit-exact integer model of the input mapping, slice and output mapping predicts q_0
//    per slice sample, and every DAC sample taken at the slice strobe must equal the model
//    at one fixed sample offset. Slices 1 and 2 have no input and must stay exactly 0.
//    The slice strobe period must be 36 clocks.
// 2. Noise: b_1 = 1 drives slice 1; its displacement must become non-zero and change sign.
// 3. Alternate tables: slice 2's u NLF gets primary table 0 and alternate table 0.5. With the
//    software select off qd_2 must stay 0; with it on qd_2 must grow; with the pin routed by
//    the mask and the pin low qd_2 must stop changing; with the pin high it must grow again.
// 4. Clear: writing the clear bit must zero all slice states.
// 5. DAC calibration: offset and gain on output 1 are checked against the displacement.
`timescale 1ns/1ps
module tb_hil_simulator;
  import hil_pkg::*;
  logic clk = 0, rst, cfg_we;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_wdata;
  io_t [N_IN-1:0] adc_in;
  logic [N_NLFSW-1:0] nlfsw_ext;
  io_t [N_OUT-1:0] dac_out;
  sig_t [N_ST-1:0] mon_q, mon_qd;
  logic mon_sample;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_simulator dut (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .adc_in, .nlfsw_ext, .dac_out,
                     .mon_q, .mon_qd, .mon_sample);

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask
  task automatic wslice(int j, int f, int v);
    wr(R_SLICE + 16*j + f, 32'(v));
  endtask
  task automatic wait_samples(int n);
    repeat (n) begin
      @(posedge clk);
      while (!mon_sample) @(posedge clk);
    end
  endtask

  function automatic longint sat25(longint v);
    if (v > 64'sd16777215) return 64'sd16777215;
    if (v < -64'sd16777216) return -64'sd16777216;
    return v;
  endfunction
  function automatic longint wrap47(longint v);
    return (v <<< 17) >>> 17;
  endfunction

  // model of slice 0 with kappa = 1, lambda = -4, unit rescaling
  longint m_prev = 0, m_hist = 0, m_accv = 0, m_accq = 0, m_q = 0, m_qd = 0;
  task automatic model(longint zv, longint uf, longint xf, longint xdf);
    longint a, v1, qn, p1;
    a = sat25((uf * zv + xf * m_q + xdf * m_qd) >>> 10);
    v1 = a + ((a - m_prev) >>> 1);
    m_prev = a;
    m_accv = wrap47(m_accv + ((v1 * 1024) <<< 12 >>> 4));
    qn = sat25((sat25(m_accv >>> 22) * 1024) >>> 10);
    p1 = (qn + m_hist) >>> 1;
    m_hist = qn;
    m_accq = wrap47(m_accq + ((p1 * 1024) <<< 12 >>> 4));
    m_q = sat25((sat25(m_accq >>> 22) * 1024) >>> 10);
    m_qd = m_hist;
  endtask

  initial begin
    longint mq[$];
    int got[$];
    int period, best, nchg;
    logic [31:0] t0, t1;
    sig_t prev_qd;
    rst = 1; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; adc_in = '0; nlfsw_ext = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    // --- 1: deterministic oscillator on slice 0
    wr(R_A + 0, 1024);
    wr(R_D + 0, 1024);
    for (int j = 0; j < 3; j++) begin
      wslice(j, 3, 1024); wslice(j, 4, -4 & 63); wslice(j, 5, 1024); wslice(j, 7, 1024);
    end
    wslice(0, 0, 1024); wslice(0, 1, -1024 & 32'h3FFFF); wslice(0, 2, -100 & 32'h3FFFF);
    adc_in[0] = 14'sd410;
    repeat (40) @(negedge clk);
    wr(R_CTRL, 1);
    @(posedge clk); while (!mon_sample) @(posedge clk);
    period = 0;
    @(posedge clk); period++;
    while (!mon_sample) begin @(posedge clk); period++; end
    checks++; if (period != SLICE_PERIOD) begin failures++; $display("period %0d", period); end
    for (int n = 0; n < 300; n++) begin
      @(posedge clk); while (!mon_sample) @(posedge clk);
      got.push_back(int'(dac_out[0]));
      checks++;
      if (mon_q[1] != 0 || mon_q[2] != 0) begin failures++; $display("idle slice moved"); end
    end
    for (int n = 0; n < 310; n++) begin
      model(410 <<< 5, 1024, -1024, -100);
      mq.push_back(m_q);
    end
    best = -1;
    for (int off = 0; off < 4 && best < 0; off++) begin
      int bad;
      bad = 0;
      for (int n = 5; n < 300; n++) begin
        longint e;
        e = (n - off >= 0) ? (mq[n - off] >>> 5) : 0;
        if (e > 8191) e = 8191;
        if (longint'(got[n]) != e) bad++;
      end
      if (bad == 0) best = off;
    end
    $display("DAC follows the model with sample offset %0d, final q %0d", best, got[299]);
    checks++; if (best < 0) failures++;
    checks++; if (got[299] < 100 || got[299] > 720) failures++;
    // --- 5: DAC calibration on output 1: y1 = q0, gain 0.5, offset 100
    wr(R_D + 3, 1024);
    wr(R_DAC_GAIN + 1, 512);
    wr(R_DAC_OFS + 1, 100);
    wait_samples(4);
    repeat (60) @(posedge clk);
    checks++;
    if (int'(dac_out[1]) != ((int'(dac_out[0]) * 512) >>> 10) + 100) begin
      failures++; $display("dac cal %0d %0d", dac_out[0], dac_out[1]);
    end
    // --- 2: noise on slice 1
    wslice(1, 0, 1024); wslice(1, 1, -1024 & 32'h3FFFF); wslice(1, 2, -200 & 32'h3FFFF);
    wr(R_B + 1, 1024);
    nchg = 0;
    begin
      int pos, neg;
      pos = 0; neg = 0;
      for (int n = 0; n < 2000; n++) begin
        wait_samples(1);
        if (mon_q[1] > 0) pos++;
        if (mon_q[1] < 0) neg++;
      end
      $display("noise-driven slice: %0d positive, %0d negative samples", pos, neg);
      checks++; if (pos < 200 || neg < 200) failures++;
    end
    // --- 3: alternate table on slice 2 u NLF (NLF index NLF_SL0 + 6, switch bit 6)
    wslice(2, 0, 1024);
    for (int e = 0; e < 1024; e++) begin
      wr((1 << 19) | ((NLF_SL0 + 6) << 11) | e, 0);
      wr((1 << 19) | ((NLF_SL0 + 6) << 11) | (1 << 10) | e, 16'd8192);
    end
    wr(R_NLF_BYP, 32'h1FFFF & ~(32'd1 << (NLF_SL0 + 6)));
    wr(R_CTRL, 3);   // clear and keep running
    wait_samples(20);
    checks++; if (mon_qd[2] != 0) begin failures++; $display("primary table should give 0"); end
    wr(R_NLFSW_SEL, 32'h40);
    wait_samples(20);
    checks++; if (mon_qd[2] <= 0) begin failures++; $display("alternate table selected but no drive"); end
    wr(R_NLFSW_IOM, 32'h40);      // pin low
    wait_samples(5);
    prev_qd = mon_qd[2];
    wait_samples(20);
    checks++; if (mon_qd[2] != prev_qd) begin failures++; $display("pin low should hold qd"); end
    @(negedge clk); nlfsw_ext = 9'h040;
    wait_samples(20);
    checks++; if (mon_qd[2] <= prev_qd) begin failures++; $display("pin high should drive"); end
    // --- 4: clear
    wr(R_CTRL, 2);
    repeat (5) @(negedge clk);
    checks++;
    if (mon_q != '0 || mon_qd != '0) begin failures++; $display("clear did not zero states"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
