// tb_lqg_hil_top: end-to-end test of the platform: LQG controller and HIL simulator in a
// closed loop, at the default sizes of both cores (no parameter overrides).
//
// The simulator's DAC output 0 drives the controller's ADC input 0 and the controller's DAC
// output 0 drives the simulator's ADC input 0, as the converters would; the two cores run on
// their own clocks (125 MHz and 250 MHz).
// Plant: slice 0 is a noise-driven, weakly damped resonator (omega = 1, damping 0.1, time
// step 1/64 per sample, noise weight 1), read out by its velocity. Controller: parameter
// set 0 copies the measured velocity into state 0 (Ld) and feeds back u = -0.5 * state 0
// (Kd), which adds viscous damping (cold damping); set 1 is the same with Kd = 0.
// The test measures the resonator's displacement variance with feedback off, with feedback
// on and with set 1 active: feedback must lower it to below half, and switching to set 1
// must raise it again to more than twice the feedback-on value.
// It also exercises: controller state clear, recorder (with a sink too slow, so that frames
// overrun), alternate NLF tables on slice 1 selected by software and by pin, NLF table writes
// and bypass, and the simulator clear. Every mechanism is counted and must have happened.
`timescale 1ns/1ps
module tb_lqg_hil_top;
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
  initial begin #400000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_hil_top dut (.*);

  // the converters: plain sample transfer between the two cores
  assign lqg_adc_in[0] = hil_dac_out[0];
  assign lqg_adc_in[1] = hil_dac_out[1];
  assign hil_adc_in[0] = lqg_dac_out[0];
  assign hil_adc_in[1] = lqg_dac_out[1];

  // ---- mechanism counters
  int n_hil_samples = 0, n_rec_words = 0, n_fb_toggle = 0, n_set_switch = 0, n_lqg_clear = 0;
  int n_hil_clear = 0, n_alt_sw = 0, n_alt_pin = 0, n_table_words = 0, n_bypass_off = 0;
  int n_noise = 0, n_param_words = 0, n_commit = 0;
  always @(posedge hil_clk) if (hil_mon_sample) n_hil_samples++;
  always @(negedge lqg_clk) if (lqg_rec_valid && lqg_rec_ready) n_rec_words++;

  task automatic hwr(int a, logic [31:0] d);
    @(negedge hil_clk);
    hil_cfg_we = 1; hil_cfg_addr = 20'(a); hil_cfg_wdata = d;
    @(negedge hil_clk);
    hil_cfg_we = 0;
    if (a >= (1 << 19)) n_table_words++;
  endtask
  task automatic lwr(int s, int a, logic [23:0] d);
    @(negedge lqg_clk);
    lqg_par_we = 1; lqg_par_set = 1'(s); lqg_par_addr = 7'(a); lqg_par_data = d;
    @(negedge lqg_clk);
    lqg_par_we = 0;
    n_param_words++;
  endtask
  task automatic wait_hil(int n);
    repeat (n) begin
      @(posedge hil_clk);
      while (!hil_mon_sample) @(posedge hil_clk);
    end
  endtask
  // variance of the resonator displacement over n slice samples
  task automatic measure(int n, output real var_q);
    real s1, s2, v;
    s1 = 0; s2 = 0;
    for (int k = 0; k < n; k++) begin
      wait_hil(1);
      v = real'(hil_mon_q[0]) / 131072.0;
      s1 += v; s2 += v * v;
    end
    var_q = s2 / n - (s1 / n) * (s1 / n);
  endtask

  initial begin
    real v_off, v_on, v_set1;
    sig_t qd_hold;
    int n_settle, n_meas;
    n_settle = 1500; n_meas = 12000;
    lqg_rst = 1; hil_rst = 1;
    lqg_o_in = '0; lqg_o_out = '0;
    for (int i = 0; i < 2; i++) begin lqg_g_in[i] = 18'sd16384; lqg_g_out[i] = 18'sd16384; end
    lqg_par_we = 0; lqg_par_set = 0; lqg_par_addr = 0; lqg_par_data = 0; lqg_commit = 0;
    lqg_set_sel = 0; lqg_fb_en = 0; lqg_state_clear = 0;
    lqg_rec_arm = 0; lqg_rec_decim = 1; lqg_rec_frames = 0; lqg_rec_mask = '1; lqg_rec_ready = 1;
    hil_cfg_we = 0; hil_cfg_addr = 0; hil_cfg_wdata = 0; hil_nlfsw_ext = '0;
    repeat (4) @(negedge lqg_clk);
    lqg_rst = 0; hil_rst = 0;

    // ---- plant configuration
    for (int j = 0; j < 2; j++) begin
      hwr(R_SLICE + 16*j + 3, 1024);          // kappa
      hwr(R_SLICE + 16*j + 4, -6 & 63);       // lambda: t_s = 2^-6
      hwr(R_SLICE + 16*j + 5, 1024);          // kappa_qd
      hwr(R_SLICE + 16*j + 7, 1024);          // kappa_q
      hwr(R_SLICE + 16*j + 0, 1024);          // u_factor
    end
    hwr(R_SLICE + 1, -1024 & 32'h3FFFF);      // x_factor: omega = 1
    hwr(R_SLICE + 2, -100 & 32'h3FFFF);       // xdot_factor: damping ~0.1
    hwr(R_A + 0, 1024);                       // z_0 = u_0 + xi_0
    hwr(R_B + 0, 1024);
    hwr(R_D + 0, 1024);                       // y_0 = qd_0
    hwr(R_OUTSEL, 1);
    // slice 1: u NLF with primary table 0 and alternate table 0.5
    for (int e = 0; e < 1024; e++) begin
      hwr((1 << 19) | ((NLF_SL0 + 3) << 11) | e, 0);
      hwr((1 << 19) | ((NLF_SL0 + 3) << 11) | (1 << 10) | e, 8192);
    end
    hwr(R_NLF_BYP, 32'h1FFFF & ~(32'd1 << (NLF_SL0 + 3)));
    n_bypass_off++;
    hwr(R_CTRL, 1);

    // ---- controller configuration: set 0 with feedback gain, set 1 without
    lwr(0, A_L + 0, 24'd16384);               // Ld[0][0] = 1.0
    lwr(0, A_K + 0, 24'd8192);                // Kd[0][0] = 0.5
    lwr(1, A_L + 0, 24'd16384);
    @(negedge lqg_clk); lqg_commit = 2'b11; n_commit++;
    @(negedge lqg_clk); lqg_commit = 2'b00;

    // ---- 1: feedback off
    wait_hil(n_settle);
    measure(n_meas, v_off);
    checks++;
    if (v_off > 0) n_noise++; else begin failures++; $display("no noise-driven motion"); end
    // ---- 2: feedback on (with a controller state clear and a recording in between)
    @(negedge lqg_clk); lqg_fb_en = 1; n_fb_toggle++;
    wait_hil(n_settle);
    @(negedge lqg_clk); lqg_state_clear = 1; n_lqg_clear++;
    @(negedge lqg_clk); lqg_state_clear = 0;
    @(negedge lqg_clk); lqg_rec_frames = 40; lqg_rec_decim = 1; lqg_rec_arm = 1;
    @(negedge lqg_clk); lqg_rec_arm = 0;
    fork
      begin
        while (lqg_rec_busy || lqg_rec_valid) begin
          @(negedge lqg_clk); lqg_rec_ready = 1'($urandom_range(0, 1));
        end
        lqg_rec_ready = 1;
      end
      measure(n_meas, v_on);
    join
    // ---- 3: set 1 (no feedback gain) selected while running
    @(negedge lqg_clk); lqg_set_sel = 1; n_set_switch++;
    wait_hil(n_settle);
    measure(n_meas, v_set1);
    $display("displacement variance: feedback off %f, on %f, set 1 %f", v_off, v_on, v_set1);
    checks++; if (!(v_on < 0.5 * v_off)) begin failures++; $display("feedback does not damp"); end
    checks++; if (!(v_set1 > 2.0 * v_on)) begin failures++; $display("set switch has no effect"); end
    checks++; if (lqg_active_set !== 1'b1) failures++;
    @(negedge lqg_clk); lqg_set_sel = 0; n_set_switch++; lqg_fb_en = 0; n_fb_toggle++;
    // ---- recorder
    $display("recorder: %0d frames, %0d words, %0d overruns", lqg_rec_frames_done, n_rec_words, lqg_rec_overruns);
    checks++; if (lqg_rec_frames_done != 40 || n_rec_words != 40 * N_CH) failures++;
    checks++; if (lqg_rec_overruns == 0) begin failures++; $display("no overrun seen"); end
    // ---- 4: alternate table of slice 1, by software and by pin
    wait_hil(20);
    checks++; if (hil_mon_qd[1] != 0) begin failures++; $display("slice 1 moved on primary table"); end
    hwr(R_NLFSW_SEL, 32'h008); n_alt_sw++;
    wait_hil(20);
    checks++; if (hil_mon_qd[1] <= 0) begin failures++; $display("alternate table not in use"); end
    hwr(R_NLFSW_IOM, 32'h008);                // pin low: primary table
    wait_hil(3);
    qd_hold = hil_mon_qd[1];
    wait_hil(20);
    checks++; if (hil_mon_qd[1] != qd_hold) begin failures++; $display("pin low did not select primary"); end
    @(negedge hil_clk); hil_nlfsw_ext = 9'h008; n_alt_pin++;
    wait_hil(20);
    checks++; if (hil_mon_qd[1] <= qd_hold) begin failures++; $display("pin high did not select alternate"); end
    // ---- 5: simulator clear
    hwr(R_CTRL, 2); n_hil_clear++;
    repeat (4) @(negedge hil_clk);
    checks++; if (hil_mon_q != '0 || hil_mon_qd != '0) begin failures++; $display("clear failed"); end

    $display("mechanisms: slice samples %0d, parameter words %0d, commits %0d, feedback toggles %0d, set switches %0d, controller clears %0d, recorder words %0d, overruns %0d, table words %0d, NLF enabled %0d, alt by software %0d, alt by pin %0d, noise %0d, simulator clears %0d",
             n_hil_samples, n_param_words, n_commit, n_fb_toggle, n_set_switch, n_lqg_clear, n_rec_words,
             lqg_rec_overruns, n_table_words, n_bypass_off, n_alt_sw, n_alt_pin, n_noise, n_hil_clear);
    begin
      int cnt [14];
      cnt = '{n_hil_samples, n_param_words, n_commit, n_fb_toggle, n_set_switch, n_lqg_clear,
              n_rec_words, int'(lqg_rec_overruns), n_table_words, n_bypass_off, n_alt_sw,
              n_alt_pin, n_noise, n_hil_clear};
      foreach (cnt[m]) begin
        checks++;
        if (cnt[m] == 0) begin failures++; $display("mechanism %0d never happened", m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
