// tb_lqg_hil_saddle: potential-switching workload on the complete platform at default sizes.
//
// One axis of a levitated particle is simulated in slice 0. Its potential force is held in
// the x NLF: the primary table is the confining force -q and the alternate table is the
// saddle force +q, each scaled by x_factor = 1. There is light damping (0.1) and thermal
// noise (b = 0.25), and t_s = 2^-6. The simulator outputs the position (y0) and the
// velocity (y1); the controller reads both and drives the force input.
//
// The controller's estimator copies the two readings into states 0 and 1 (Ld = identity,
// Ad - Ld C = 0). There are two parameter sets:
//   set 0: u = -1.0 * velocity                   (cold damping only; cannot hold a saddle)
//   set 1: u = -2.0 * position - 1.0 * velocity  (stiffens the trap; holds the saddle)
// Both ADC and DAC calibrations are unity. The factor 2 between the controller's 13 and the
// simulator's 12 fraction bits cancels around the loop.
//
// The protocol is the classic switching sequence:
//   1. confining potential, feedback off: the particle moves thermally, bounded;
//   2. feedback on with set 0: its variance drops;
//   3. controller switched to set 1, then the potential switched to the saddle by software:
//      the particle stays confined;
//   4. feedback off: the particle leaves the saddle (|q| exceeds 0.9);
//   5. simulator reset, potential left on the saddle, feedback on with set 0 only: the
//      particle is lost as well, because the wrong set is active.
// The checks are on variances and on the largest excursion, plus the active set and the
// fact that the alternate table was in use. A watchdog ends a hung run.
`timescale 1ns/1ps
module tb_lqg_hil_saddle;
  import lqg_pkg::*;
  import hil_pkg::*;
  logic lqg_clk = 0, hil_clk = 0;
  logic lqg_rst, hil_rst;
  uw_t  [N_Y-1:0] lqg_adc_in, lqg_o_in;
  uw_t  [N_U-1:0] lqg_dac_out, lqg_o_out, lqg_mon_u;
  logic signed [N_Y-1:0][17:0] lqg_g_in;
  logic signed [N_U-1:0][17:0] lqg_g_out;
  logic lqg_par_we, lqg_par_set, lqg_set_sel, lqg_fb_en, lqg_state_clear, lqg_active_set;
  logic [6:0] lqg_par_addr;
  logic [23:0] lqg_par_data;
  logic [1:0] lqg_commit;
  logic lqg_rec_arm, lqg_rec_valid, lqg_rec_last, lqg_rec_ready, lqg_rec_busy;
  logic [15:0] lqg_rec_decim, lqg_rec_overruns;
  logic [31:0] lqg_rec_frames, lqg_rec_data, lqg_rec_frames_done;
  logic [N_CH-1:0] lqg_rec_mask;
  xw_t [N_X-1:0] lqg_mon_xi;
  logic hil_cfg_we, hil_mon_sample;
  logic [19:0] hil_cfg_addr;
  logic [31:0] hil_cfg_wdata;
  io_t [N_IN-1:0] hil_adc_in;
  io_t [N_OUT-1:0] hil_dac_out;
  logic [N_NLFSW-1:0] hil_nlfsw_ext;
  sig_t [N_ST-1:0] hil_mon_q, hil_mon_qd;
  int checks = 0, failures = 0;

  always #4 lqg_clk = ~lqg_clk;
  always #2 hil_clk = ~hil_clk;
  initial begin #200000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_hil_top dut (.*);

  assign lqg_adc_in[0] = hil_dac_out[0];
  assign lqg_adc_in[1] = hil_dac_out[1];
  assign hil_adc_in[0] = lqg_dac_out[0];
  assign hil_adc_in[1] = lqg_dac_out[1];

  localparam int X_NLF = NLF_SL0 + 1;         // slice 0, x NLF

  task automatic hwr(int a, logic [31:0] d);
    @(negedge hil_clk);
    hil_cfg_we = 1; hil_cfg_addr = 20'(a); hil_cfg_wdata = d;
    @(negedge hil_clk);
    hil_cfg_we = 0;
  endtask
  task automatic lwr(int s, int a, logic [23:0] d);
    @(negedge lqg_clk);
    lqg_par_we = 1; lqg_par_set = 1'(s); lqg_par_addr = 7'(a); lqg_par_data = d;
    @(negedge lqg_clk);
    lqg_par_we = 0;
  endtask
  task automatic wait_hil(int n);
    repeat (n) begin
      @(posedge hil_clk);
      while (!hil_mon_sample) @(posedge hil_clk);
    end
  endtask
  // variance and largest |q| of the particle position over n slice samples
  task automatic measure(int n, output real var_q, output real max_q);
    real s1, s2, v;
    s1 = 0; s2 = 0; max_q = 0;
    for (int k = 0; k < n; k++) begin
      wait_hil(1);
      v = real'(hil_mon_q[0]) / 131072.0;
      s1 += v; s2 += v * v;
      if (v > max_q) max_q = v;
      if (-v > max_q) max_q = -v;
    end
    var_q = s2 / n - (s1 / n) * (s1 / n);
  endtask
  // largest |q| reached within n slice samples (stops early once beyond 0.9)
  task automatic escape(int n, output real max_q);
    real v;
    max_q = 0;
    for (int k = 0; k < n && max_q <= 0.9; k++) begin
      wait_hil(1);
      v = real'(hil_mon_q[0]) / 131072.0;
      if (v > max_q) max_q = v;
      if (-v > max_q) max_q = -v;
    end
  endtask

  initial begin
    real v_free, m_free, v_damp, m_damp, v_sad, m_sad, m_fall, m_wrong;
    int n_settle, n_meas;
    n_settle = 1000; n_meas = 6000;
    lqg_rst = 1; hil_rst = 1;
    lqg_o_in = '0; lqg_o_out = '0;
    for (int i = 0; i < 2; i++) begin lqg_g_in[i] = 18'sd16384; lqg_g_out[i] = 18'sd16384; end
    lqg_par_we = 0; lqg_par_set = 0; lqg_par_addr = 0; lqg_par_data = 0; lqg_commit = 0;
    lqg_set_sel = 0; lqg_fb_en = 0; lqg_state_clear = 0;
    lqg_rec_arm = 0; lqg_rec_decim = 1; lqg_rec_frames = 0; lqg_rec_mask = '1; lqg_rec_ready = 1;
    hil_cfg_we = 0; hil_cfg_addr = 0; hil_cfg_wdata = 0; hil_nlfsw_ext = '0;
    repeat (4) @(negedge lqg_clk);
    lqg_rst = 0; hil_rst = 0;

    // ---- plant: slice 0
    hwr(R_SLICE + 3, 1024);                   // kappa
    hwr(R_SLICE + 4, -6 & 63);                // lambda: t_s = 2^-6
    hwr(R_SLICE + 5, 1024);                   // kappa_qd
    hwr(R_SLICE + 7, 1024);                   // kappa_q
    hwr(R_SLICE + 0, 1024);                   // u_factor
    hwr(R_SLICE + 1, 1024);                   // x_factor: force = table value
    hwr(R_SLICE + 2, -100 & 32'h3FFFF);       // xdot_factor: damping ~0.1
    hwr(R_A + 0, 1024);                       // z_0 = u_0 + 0.25 xi_0
    hwr(R_B + 0, 256);
    hwr(R_D + 0, 1024);                       // y_0 = q_0
    hwr(R_D + 3, 1024);                       // y_1 = qd_0
    hwr(R_OUTSEL, 32'h008);
    // entry e holds F(x), x = -1 + e/512, 14 fraction bits
    for (int e = 0; e < 1024; e++) begin
      int x14;
      x14 = -16384 + 32 * e;
      hwr((1 << 19) | (X_NLF << 11) | e, 32'(-x14) & 32'hFFFF);               // confining
      hwr((1 << 19) | (X_NLF << 11) | (1 << 10) | e, 32'(x14) & 32'hFFFF);    // saddle
    end
    hwr(R_NLF_BYP, 32'h1FFFF & ~(32'd1 << X_NLF));
    hwr(R_CTRL, 1);

    // ---- controller: Ld = identity on states 0/1; set 0 damping only, set 1 adds stiffness
    for (int s = 0; s < 2; s++) begin
      lwr(s, A_L + 0, 24'd16384);             // Ld[0][0] = 1.0
      lwr(s, A_L + 3, 24'd16384);             // Ld[1][1] = 1.0
      lwr(s, A_K + 1, 24'd16384);             // Kd[0][1] = 1.0 (velocity)
    end
    lwr(1, A_K + 0, 24'd32768);               // Kd[0][0] = 2.0 (position), set 1 only
    @(negedge lqg_clk); lqg_commit = 2'b11;
    @(negedge lqg_clk); lqg_commit = 2'b00;

    // ---- 1: confining, no feedback
    wait_hil(n_settle);
    measure(n_meas, v_free, m_free);
    // ---- 2: feedback with set 0
    @(negedge lqg_clk); lqg_fb_en = 1;
    wait_hil(n_settle);
    measure(n_meas, v_damp, m_damp);
    // ---- 3: controller to set 1 first, then the saddle
    @(negedge lqg_clk); lqg_set_sel = 1;
    wait_hil(200);
    checks++; if (lqg_active_set !== 1'b1) begin failures++; $display("set 1 not active"); end
    hwr(R_NLFSW_SEL, 32'h002);
    wait_hil(n_settle);
    measure(n_meas, v_sad, m_sad);
    // ---- 4: feedback off on the saddle
    @(negedge lqg_clk); lqg_fb_en = 0;
    escape(4000, m_fall);
    // ---- 5: restart on the saddle with the wrong set
    @(negedge lqg_clk); lqg_set_sel = 0; lqg_fb_en = 1;
    wait_hil(200);
    hwr(R_CTRL, 3);                           // keep running, reset the integrators
    escape(4000, m_wrong);

    $display("confining free: var %f max %f; set 0: var %f max %f; saddle, set 1: var %f max %f",
             v_free, m_free, v_damp, m_damp, v_sad, m_sad);
    $display("saddle, feedback off: max %f; saddle, set 0: max %f", m_fall, m_wrong);
    checks++; if (!(v_free > 0 && m_free < 0.5)) begin failures++; $display("free motion wrong"); end
    checks++; if (!(v_damp < 0.5 * v_free)) begin failures++; $display("set 0 does not damp"); end
    checks++; if (!(v_sad > 0 && m_sad < 0.5)) begin failures++; $display("set 1 does not hold the saddle"); end
    checks++; if (!(m_fall > 0.9)) begin failures++; $display("particle stays without feedback"); end
    checks++; if (!(m_wrong > 0.9)) begin failures++; $display("set 0 holds the saddle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
