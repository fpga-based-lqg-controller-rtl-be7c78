// lqg_controller: real-time LQG controller core for up to three oscillating degrees of
// freedom plus a drift state (7 states), two detector inputs and two actuator outputs.
//
// Data path: ADC samples -> calibration chi = (raw + o_in) * g_in -> estimator/regulator
// (lqg_engine, 64 ns per sample) -> u -> calibration u_out = u * g_out + o_out -> DAC.
// Coefficients come from lqg_param_bank (two sets, staged writes, simultaneous commit,
// switchable while running). lqg_recorder captures chi, u and the estimated states as frames
// for the processor's memory.
//
// Interface: 125 MHz clock, synchronous reset. Converter words are 14-bit two's complement
// (13 fraction bits at the engine). Calibration gains are 18-bit with 14 fraction bits.
// par_* is the coefficient write port, set_sel/commit/fb_en/state_clear the run-time
// controls, rec_* the recorder controls and its word stream.
// Timing: an ADC sample reaches the engine after 4 clocks of calibration, is used at the
// next sample boundary (every 8 clocks), affects u one sample (8 clocks) later, and u reaches
// the DAC port after 4 more clocks of calibration.
// Which blocks exist and what they compute is the paper's; the ports and the latencies of
// the calibration stages are this design's choices.
module lqg_controller
  import lqg_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst,
  // converters
  input  uw_t  [N_Y-1:0]             adc_in,
  output uw_t  [N_U-1:0]             dac_out,
  // calibration
  input  uw_t  [N_Y-1:0]             o_in,
  input  logic signed [N_Y-1:0][17:0] g_in,
  input  uw_t  [N_U-1:0]             o_out,
  input  logic signed [N_U-1:0][17:0] g_out,
  // parameter sets and run-time control
  input  logic                       par_we,
  input  logic                       par_set,
  input  logic [6:0]                 par_addr,
  input  logic [23:0]                par_data,
  input  logic [1:0]                 commit,
  input  logic                       set_sel,
  input  logic                       fb_en,
  input  logic                       state_clear,
  output logic                       active_set,
  // recorder
  input  logic                       rec_arm,
  input  logic [15:0]                rec_decim,
  input  logic [31:0]                rec_frames,
  input  logic [N_CH-1:0]            rec_mask,
  output logic                       rec_valid,
  output logic [31:0]                rec_data,
  output logic                       rec_last,
  input  logic                       rec_ready,
  output logic                       rec_busy,
  output logic [31:0]                rec_frames_done,
  output logic [15:0]                rec_overruns,
  // monitors
  output xw_t  [N_X-1:0]             mon_xi,
  output uw_t  [N_U-1:0]             mon_u
);
  uw_t [N_Y-1:0] chi;
  for (genvar i = 0; i < N_Y; i++) begin : g_adc
    io_calib #(.W(U_W), .GW(18), .GFRAC(C_FRAC), .OFFSET_FIRST(1'b1)) u_cal (
      .clk, .din(adc_in[i]), .offset(o_in[i]), .gain(g_in[i]), .dout(chi[i])
    );
  end

  lqg_set_t params;
  logic     s_start, s_end;
  lqg_param_bank u_bank (
    .clk, .rst, .we(par_we), .wset(par_set), .waddr(par_addr), .wdata(par_data),
    .commit, .sel(set_sel), .sample_end(s_end), .params, .active_sel(active_set)
  );

  uw_t [N_U-1:0] u;
  xw_t [N_X-1:0] xi;
  uw_t [N_Y-1:0] chi_s;
  lqg_engine u_eng (
    .clk, .rst, .clear(state_clear), .fb_en, .params, .chi, .u, .xi, .chi_s,
    .sample_start(s_start), .sample_end(s_end)
  );

  for (genvar i = 0; i < N_U; i++) begin : g_dac
    io_calib #(.W(U_W), .GW(18), .GFRAC(C_FRAC), .OFFSET_FIRST(1'b0)) u_cal (
      .clk, .din(u[i]), .offset(o_out[i]), .gain(g_out[i]), .dout(dac_out[i])
    );
  end

  // the recorder latches the values of the sample that has just been completed
  logic signed [N_CH-1:0][31:0] ch;
  always_comb begin
    for (int i = 0; i < N_Y; i++) ch[i]           = 32'($signed(chi_s[i]));
    for (int i = 0; i < N_U; i++) ch[N_Y + i]     = 32'($signed(u[i]));
    for (int i = 0; i < N_X; i++) ch[N_Y + N_U + i] = 32'($signed(xi[i]));
  end
  lqg_recorder #(.N_CH(N_CH)) u_rec (
    .clk, .rst, .arm(rec_arm), .decim(rec_decim), .n_frames(rec_frames), .ch_mask(rec_mask),
    .tick(s_start), .ch, .m_valid(rec_valid), .m_data(rec_data), .m_last(rec_last),
    .m_ready(rec_ready), .recording(rec_busy), .frames_done(rec_frames_done),
    .overruns(rec_overruns)
  );

  assign mon_xi = xi;
  assign mon_u  = u;
endmodule
