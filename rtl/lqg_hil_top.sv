// lqg_hil_top: the two cores of the platform side by side: the LQG controller
// (lqg_controller, 125 MHz) and the hardware-in-the-loop plant simulator (hil_simulator,
// 250 MHz). On hardware each core runs on its own board and the loop is closed through the
// analog converters: the simulator's DAC outputs drive the controller's ADC inputs and the
// controller's DAC outputs drive the simulator's ADC inputs. Here the converter sample ports
// of both cores are brought out unchanged, so that a test bench (or two boards) can close the
// loop; nothing connects the two cores inside this module. Each core keeps its own clock,
// reset and configuration ports (prefix lqg_ / hil_); see those modules for their timing.
module lqg_hil_top
  import lqg_pkg::*;
  import hil_pkg::*;
(
  // ---------------- LQG controller ----------------
  input  logic                        lqg_clk,
  input  logic                        lqg_rst,
  input  uw_t  [N_Y-1:0]              lqg_adc_in,
  output uw_t  [N_U-1:0]              lqg_dac_out,
  input  uw_t  [N_Y-1:0]              lqg_o_in,
  input  logic signed [N_Y-1:0][17:0] lqg_g_in,
  input  uw_t  [N_U-1:0]              lqg_o_out,
  input  logic signed [N_U-1:0][17:0] lqg_g_out,
  input  logic                        lqg_par_we,
  input  logic                        lqg_par_set,
  input  logic [6:0]                  lqg_par_addr,
  input  logic [23:0]                 lqg_par_data,
  input  logic [1:0]                  lqg_commit,
  input  logic                        lqg_set_sel,
  input  logic                        lqg_fb_en,
  input  logic                        lqg_state_clear,
  output logic                        lqg_active_set,
  input  logic                        lqg_rec_arm,
  input  logic [15:0]                 lqg_rec_decim,
  input  logic [31:0]                 lqg_rec_frames,
  input  logic [N_CH-1:0]             lqg_rec_mask,
  output logic                        lqg_rec_valid,
  output logic [31:0]                 lqg_rec_data,
  output logic                        lqg_rec_last,
  input  logic                        lqg_rec_ready,
  output logic                        lqg_rec_busy,
  output logic [31:0]                 lqg_rec_frames_done,
  output logic [15:0]                 lqg_rec_overruns,
  output xw_t  [N_X-1:0]              lqg_mon_xi,
  output uw_t  [N_U-1:0]              lqg_mon_u,
  // ---------------- HIL simulator ----------------
  input  logic                        hil_clk,
  input  logic                        hil_rst,
  input  logic                        hil_cfg_we,
  input  logic [19:0]                 hil_cfg_addr,
  input  logic [31:0]                 hil_cfg_wdata,
  input  io_t  [N_IN-1:0]             hil_adc_in,
  input  logic [N_NLFSW-1:0]          hil_nlfsw_ext,
  output io_t  [N_OUT-1:0]            hil_dac_out,
  output sig_t [N_ST-1:0]             hil_mon_q,
  output sig_t [N_ST-1:0]             hil_mon_qd,
  output logic                        hil_mon_sample
);
  lqg_controller u_lqg (
    .clk(lqg_clk), .rst(lqg_rst), .adc_in(lqg_adc_in), .dac_out(lqg_dac_out),
    .o_in(lqg_o_in), .g_in(lqg_g_in), .o_out(lqg_o_out), .g_out(lqg_g_out),
    .par_we(lqg_par_we), .par_set(lqg_par_set), .par_addr(lqg_par_addr),
    .par_data(lqg_par_data), .commit(lqg_commit), .set_sel(lqg_set_sel), .fb_en(lqg_fb_en),
    .state_clear(lqg_state_clear), .active_set(lqg_active_set),
    .rec_arm(lqg_rec_arm), .rec_decim(lqg_rec_decim), .rec_frames(lqg_rec_frames),
    .rec_mask(lqg_rec_mask), .rec_valid(lqg_rec_valid), .rec_data(lqg_rec_data),
    .rec_last(lqg_rec_last), .rec_ready(lqg_rec_ready), .rec_busy(lqg_rec_busy),
    .rec_frames_done(lqg_rec_frames_done), .rec_overruns(lqg_rec_overruns),
    .mon_xi(lqg_mon_xi), .mon_u(lqg_mon_u)
  );

  hil_simulator u_hil (
    .clk(hil_clk), .rst(hil_rst), .cfg_we(hil_cfg_we), .cfg_addr(hil_cfg_addr),
    .cfg_wdata(hil_cfg_wdata), .adc_in(hil_adc_in), .nlfsw_ext(hil_nlfsw_ext),
    .dac_out(hil_dac_out), .mon_q(hil_mon_q), .mon_qd(hil_mon_qd),
    .mon_sample(hil_mon_sample)
  );
endmodule
