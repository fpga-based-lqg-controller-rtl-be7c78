// hil_simulator: real-time hardware-in-the-loop plant simulator core.
//
// It solves, for N_ST = 3 independent degrees of freedom driven by N_IN = 2 inputs and
// observed through N_OUT = 2 outputs, the stochastic model
//   qdd_j = xdot_factor_j f_j(qd_j) + x_factor_j g_j(q_j) + u_factor_j h_j(z_j),
//   z_j   = b_j xi_j + sum_i a_{j,i} alpha_i(u_i),
//   y_k   = sum_j d_{k,j} beta_{j,k}(q_j or qd_j),
// with Gaussian noise xi_j and LUT-based nonlinear functions everywhere.
// Data path: ADC calibration -> input mapping (at 250 MHz) -> three state slices (one sample
// every 36 clocks, 6.944 MS/s) -> output mapping (at 250 MHz) -> DAC calibration. Three
// noise generators advance once per slice sample.
//
// Interface: 250 MHz clock, synchronous reset; a 32-bit write bus for configuration
// (hil_cfg_regs); 14-bit ADC samples in and DAC samples out (12 fraction bits); nlfsw_ext are
// external pins that can select the alternate table of each slice NLF, bit 3*j + {0:u, 1:x,
// 2:xdot}, where cfg.nlfsw_iomask routes that bit from the pin rather than from nlfsw_sel.
// Monitors: slice states and the sample strobe.
//
// Timing: ADC cal 4 + input NLF 12 + input linear 6 + slices 36 + output NLF 12 + output
// linear 7 + DAC cal 4 = 81 clocks (324 ns) of processing when the slice sample falls right
// after z settles, as in the paper's delay table. The block structure, rates and latencies
// are the paper's; the NLF-switch bit numbering and the pin synchronizer are this design's.
module hil_simulator
  import hil_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   cfg_we,
  input  logic [19:0]            cfg_addr,
  input  logic [31:0]            cfg_wdata,
  input  io_t  [N_IN-1:0]        adc_in,
  input  logic [N_NLFSW-1:0]     nlfsw_ext,
  output io_t  [N_OUT-1:0]       dac_out,
  output sig_t [N_ST-1:0]        mon_q,
  output sig_t [N_ST-1:0]        mon_qd,
  output logic                   mon_sample
);
  hil_cfg_t cfg;
  tw_t      tw;
  logic     run, clear;
  hil_cfg_regs u_regs (
    .clk, .rst, .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata),
    .cfg, .tw, .run, .clear
  );

  // slice sample sequencer
  logic [5:0] seq;
  logic       start;
  always_ff @(posedge clk) begin
    if (rst || clear || !run) seq <= '0;
    else                      seq <= (seq == 6'(SLICE_PERIOD - 1)) ? 6'd0 : seq + 6'd1;
  end
  assign start      = run && !clear && (seq == '0);
  assign mon_sample = start;

  // NLF alternate-table selection
  logic [N_NLFSW-1:0] ext_s1, ext_s2, alt;
  always_ff @(posedge clk) begin
    ext_s1 <= nlfsw_ext;
    ext_s2 <= ext_s1;
  end
  assign alt = (cfg.nlfsw_iomask & ext_s2) | (~cfg.nlfsw_iomask & cfg.nlfsw_sel);

  // ADC calibration
  io_t [N_IN-1:0] u;
  for (genvar i = 0; i < N_IN; i++) begin : g_adc
    io_calib #(.W(IO_W), .GW(K_W), .GFRAC(K_FRAC), .OFFSET_FIRST(1'b1)) u_cal (
      .clk, .din(adc_in[i]), .offset(cfg.adc_cal[i].offset), .gain(cfg.adc_cal[i].gain),
      .dout(u[i])
    );
  end

  // noise
  sig_t [N_ST-1:0] xi;
  for (genvar j = 0; j < N_ST; j++) begin : g_noise
    hil_noise_gen #(.SEED(24'hACE1F3 ^ (24'h5A5A5 * 24'(j + 1)))) u_noise (
      .clk, .rst(rst || clear), .step(start), .xi(xi[j]), .lfsr_state()
    );
  end

  // input mapping
  sig_t [N_ST-1:0] z;
  hil_input_mapping u_imap (
    .clk, .u, .xi, .a(cfg.a), .b(cfg.b), .nlf_cfg(cfg.nlf[NLF_IN0 +: N_IN]), .tw, .z
  );

  // state slices
  sig_t [N_ST-1:0] q, qd;
  for (genvar j = 0; j < N_ST; j++) begin : g_slice
    hil_state_slice #(.NLF_BASE(NLF_SL0 + 3*j)) u_slice (
      .clk, .clear(rst || clear), .start, .z(z[j]), .cfg(cfg.slice[j]),
      .nlf_cfg(cfg.nlf[NLF_SL0 + 3*j +: 3]), .alt_sel(alt[3*j +: 3]), .tw,
      .q(q[j]), .qd(qd[j]), .qdd_mon(), .done()
    );
  end
  assign mon_q  = q;
  assign mon_qd = qd;

  // output mapping
  io_t [N_OUT-1:0] y;
  hil_output_mapping u_omap (
    .clk, .q, .qd, .d(cfg.d), .out_sel(cfg.out_sel),
    .nlf_cfg(cfg.nlf[NLF_OUT0 +: N_ST*N_OUT]), .tw, .y
  );

  // DAC calibration
  for (genvar k = 0; k < N_OUT; k++) begin : g_dac
    io_calib #(.W(IO_W), .GW(K_W), .GFRAC(K_FRAC), .OFFSET_FIRST(1'b0)) u_cal (
      .clk, .din(y[k]), .offset(cfg.dac_cal[k].offset), .gain(cfg.dac_cal[k].gain),
      .dout(dac_out[k])
    );
  end
endmodule
