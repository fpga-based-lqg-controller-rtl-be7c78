// tb_lqg_controller: self-checking test of the complete LQG controller.
//
// Two random parameter sets are loaded word by word through the parameter port and
// committed. Every sample the ADC inputs change; the shared bit-exact model (lqg_model.svh)
// together with models of the ADC calibration ((adc + o_in) * g_in) and DAC calibration
// (u * g_out + o_out) predicts the estimated state, u and the DAC outputs, which are compared
// once per sample. During the run the test switches the active set (effective from the
// second sample after the request, at a sample boundary), toggles feedback enable, clears the
// state, reloads set 1 while set 0 is active, and records frames with the recorder; every
// recorded frame must equal the model's (chi, u, state) of one sample. Each of these
// mechanisms is counted and must have happened. The sample strobe is taken from inside the
// DUT only to align the stimulus.
`timescale 1ns/1ps
module tb_lqg_controller;
  import lqg_pkg::*;
  `include "lqg_model.svh"
  logic clk = 0, rst;
  uw_t [N_Y-1:0] adc_in, o_in;
  uw_t [N_U-1:0] dac_out, o_out, mon_u;
  logic signed [N_Y-1:0][17:0] g_in;
  logic signed [N_U-1:0][17:0] g_out;
  logic par_we, par_set, set_sel, fb_en, state_clear, active_set;
  logic [6:0] par_addr;
  logic [23:0] par_data;
  logic [1:0] commit;
  logic rec_arm, rec_valid, rec_last, rec_ready, rec_busy;
  logic [15:0] rec_decim, rec_overruns;
  logic [31:0] rec_frames, rec_data, rec_frames_done;
  logic [N_CH-1:0] rec_mask;
  xw_t [N_X-1:0] mon_xi;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  initial begin #50000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_controller dut (.*);

  lqg_set_t sets [2];
  longint xs [7], uo [2], cv [2], cv_next [2];
  longint hist [$][N_CH];            // model (chi, u, xi) per sample

  function automatic longint sat14(longint v);
    if (v > 64'sd8191) return 64'sd8191;
    if (v < -64'sd8192) return -64'sd8192;
    return v;
  endfunction

  task automatic load(int s, lqg_set_t p);
    for (int a = 0; a < N_PWORDS; a++) begin
      @(negedge clk);
      par_we = 1; par_set = 1'(s); par_addr = 7'(a); par_data = mdl_word(p, a);
    end
    @(negedge clk);
    par_we = 0;
  endtask

  // collect recorder words in the background
  longint frame [N_CH];
  int fw = 0, nframes_ok = 0, nframes_bad = 0;
  // (sampled on the falling edge: the handshake then happens at the following rising edge)
  always @(negedge clk) begin
    if (rec_valid && rec_ready) begin
      frame[fw] = longint'($signed(rec_data));
      fw++;
      if (rec_last) begin
        bit found;
        found = 0;
        for (int h = hist.size() - 1; h >= 0 && h >= hist.size() - 6 && !found; h--) begin
          bit same;
          same = 1;
          for (int c = 0; c < N_CH; c++) if (hist[h][c] != frame[c]) same = 0;
          if (same) found = 1;
        end
        if (found && fw == N_CH) nframes_ok++;
        else begin
          nframes_bad++;
          $display("unmatched frame: chi %0d %0d u %0d %0d x0 %0d", frame[0], frame[1], frame[2], frame[3], frame[4]);
        end
        fw = 0;
      end
    end
  end

  initial begin
    int n_switch = 0, n_fboff = 0, n_clear = 0, n_reload = 0, sel_delay = -1, model_set = 0;
    bit model_fb;
    rst = 1; adc_in = '0; o_in = '0; o_out = '0; par_we = 0; par_set = 0; par_addr = 0;
    par_data = 0; commit = 0; set_sel = 0; fb_en = 0; state_clear = 0;
    rec_arm = 0; rec_decim = 1; rec_frames = 0; rec_mask = '1; rec_ready = 1;
    for (int i = 0; i < 2; i++) begin g_in[i] = 18'sd16384; g_out[i] = 18'sd16384; end
    repeat (3) @(negedge clk);
    rst = 0;
    sets[0] = mdl_random_set(13, 22);
    sets[1] = mdl_random_set(13, 22);
    load(0, sets[0]);
    load(1, sets[1]);
    @(negedge clk); commit = 2'b11;
    @(negedge clk); commit = 2'b00;
    o_in[0] = 14'sd37; o_in[1] = -14'sd120; g_in[0] = 18'sd15000; g_in[1] = 18'sd17500;
    o_out[0] = -14'sd50; o_out[1] = 14'sd8; g_out[0] = 18'sd16000; g_out[1] = 18'sd20000;
    fb_en = 1; model_fb = 1;
    // align: wait for two sample starts so that the committed sets and the reset state are in use
    // (the state is held cleared meanwhile)
    state_clear = 1;
    repeat (2) begin @(negedge clk); while (!dut.s_start) @(negedge clk); end
    // the state is zero and u is zero at this point
    for (int c = 0; c < 7; c++) xs[c] = 0;
    uo[0] = 0; uo[1] = 0;
    for (int i = 0; i < 2; i++) cv_next[i] = sat14((longint'(o_in[i]) * longint'(g_in[i])) >>> 14);
    for (int n = 0; n < 600; n++) begin
      bit do_clear;
      // we are in the clock before a sample-start edge: compare the previous sample
      if (n > 0) begin
        checks++;
        for (int c = 0; c < 7; c++) if (longint'(mon_xi[c]) != xs[c]) begin
          failures++; if (failures < 8) $display("n %0d xi[%0d] %0d exp %0d", n, c, mon_xi[c], xs[c]); break;
        end
        checks++;
        for (int i = 0; i < 2; i++) begin
          longint ed;
          ed = sat14(((uo[i] * longint'(g_out[i])) >>> 14) + longint'(o_out[i]));
          if (longint'(mon_u[i]) != uo[i] || longint'(dac_out[i]) != ed) begin
            failures++; if (failures < 8) $display("n %0d u %0d/%0d dac %0d/%0d", n, mon_u[i], uo[i], dac_out[i], ed);
          end
        end
        begin
          longint h [N_CH];
          for (int c = 0; c < 2; c++) h[c] = cv[c];
          for (int c = 0; c < 2; c++) h[2 + c] = uo[c];
          for (int c = 0; c < 7; c++) h[4 + c] = xs[c];
          hist.push_back(h);
        end
      end
      // stimulus for the coming sample
      // (the ADC calibration takes 4 clocks, so a value applied now is used from the sample
      // after the coming one on)
      for (int i = 0; i < 2; i++) begin
        cv[i] = cv_next[i];
        adc_in[i] = uw_t'($urandom_range(0, 4000)) - 14'sd2000;
        cv_next[i] = sat14(((longint'(adc_in[i]) + longint'(o_in[i])) * longint'(g_in[i])) >>> 14);
      end
      do_clear = (n % 150 == 149);
      state_clear = do_clear;
      if (n_clear < 4 && do_clear) n_clear++;
      if (n % 40 == 39) begin fb_en = ~fb_en; if (!fb_en) n_fboff++; end
      if (n % 60 == 30) begin set_sel = ~set_sel; sel_delay = 1; n_switch++; end
      if (n == 100) rec_arm = 1;
      rec_frames = 32'd50; rec_decim = 16'd3;
      // model of the coming sample (set switch requested now takes effect one sample later)
      if (sel_delay == 0) model_set = int'(set_sel);
      if (sel_delay >= 0) sel_delay--;
      if (do_clear) begin
        for (int c = 0; c < 7; c++) xs[c] = 0;
        uo[0] = 0; uo[1] = 0; cv[0] = 0; cv[1] = 0;
      end else mdl_sample(sets[model_set], fb_en, cv, xs, uo);
      @(negedge clk);
      state_clear = 0; rec_arm = 0;
      while (!dut.s_start) @(negedge clk);
      // reload set 1 while set 0 is active, committed at once
      if (n == 350 && model_set == 0 && set_sel == 0) begin
        sets[1] = mdl_random_set(13, 22);
        for (int a = 0; a < N_PWORDS; a++) begin
          @(negedge clk);
          par_we = 1; par_set = 1; par_addr = 7'(a); par_data = mdl_word(sets[1], a);
        end
        @(negedge clk); par_we = 0; commit = 2'b10;
        @(negedge clk); commit = 2'b00;
        n_reload++;
        while (!dut.s_start) @(negedge clk);
        // the state ran on during the reload with the same inputs: resynchronise the model
        for (int c = 0; c < 7; c++) xs[c] = longint'(mon_xi[c]);
        uo[0] = longint'(mon_u[0]); uo[1] = longint'(mon_u[1]);
      end
    end
    $display("switches %0d, feedback-off %0d, clears %0d, reloads %0d, frames ok %0d bad %0d",
             n_switch, n_fboff, n_clear, n_reload, nframes_ok, nframes_bad);
    checks++; if (n_switch == 0 || n_fboff == 0 || n_clear == 0 || n_reload == 0) failures++;
    checks++; if (nframes_ok != 50 || nframes_bad != 0 || rec_frames_done != 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
