// hil_cfg_regs: memory-mapped configuration of the HIL simulator.
//
// A processor writes 32-bit words (we, addr, wdata; one write per clock, no wait states).
// Word addresses with bit 19 clear select the registers listed in hil_pkg (R_*): control,
// NLF alternate-switch mask and select, NLF bypass mask, converter calibration, input and
// output weights, output selects, slice constants and NLF scales. Constants take the low 18
// bits of wdata, shift amounts the low 6. Addresses with bit 19 set write one NLF table
// entry: addr[15:11] NLF index, addr[10] alternate table, addr[9:0] entry, wdata[15:0] value;
// such a write is forwarded one clock later on `tw`.
//
// Control register: bit 0 `run` enables the slice sample clock; writing bit 1 as 1 gives a
// one-clock `clear` pulse that resets all integrators (the "reset simulation" command).
// After reset every NLF is bypassed, gains and NLF scales are 1.0 and all other constants
// are zero.
// The memory-mapped path and the commands it carries are from the paper; the address map,
// field widths and reset values are this design's choices.
module hil_cfg_regs
  import hil_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        we,
  input  logic [19:0] addr,
  input  logic [31:0] wdata,
  output hil_cfg_t    cfg,
  output tw_t         tw,
  output logic        run,
  output logic        clear
);
  localparam kconst_t ONE = kconst_t'(1 << K_FRAC);

  logic [7:0] ra;
  assign ra = addr[7:0];
  kconst_t kw;
  shift_t  sw;
  assign kw = wdata[K_W-1:0];
  assign sw = wdata[SH_W-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg   <= '0;
      for (int i = 0; i < N_IN; i++)  cfg.adc_cal[i].gain <= ONE;
      for (int i = 0; i < N_OUT; i++) cfg.dac_cal[i].gain <= ONE;
      for (int n = 0; n < N_NLF; n++) begin
        cfg.nlf[n].bypass    <= 1'b1;
        cfg.nlf[n].in_scale  <= ONE;
        cfg.nlf[n].out_scale <= ONE;
      end
      tw    <= '0;
      run   <= 1'b0;
      clear <= 1'b0;
    end else begin
      clear  <= 1'b0;
      tw.en  <= 1'b0;
      if (we && addr[19]) begin
        tw.en   <= 1'b1;
        tw.nlf  <= addr[15:11];
        tw.alt  <= addr[10];
        tw.addr <= addr[9:0];
        tw.data <= wdata[LUT_W-1:0];
      end else if (we && addr[18:8] == '0) begin
        if (ra == 8'(R_CTRL)) begin
          run   <= wdata[0];
          clear <= wdata[1];
        end
        if (ra == 8'(R_NLFSW_IOM)) cfg.nlfsw_iomask <= wdata[N_NLFSW-1:0];
        if (ra == 8'(R_NLFSW_SEL)) cfg.nlfsw_sel    <= wdata[N_NLFSW-1:0];
        if (ra == 8'(R_NLF_BYP))
          for (int n = 0; n < N_NLF; n++) cfg.nlf[n].bypass <= wdata[n];
        for (int c = 0; c < N_IN; c++) begin
          if (ra == 8'(R_ADC_OFS + c))  cfg.adc_cal[c].offset <= wdata[IO_W-1:0];
          if (ra == 8'(R_ADC_GAIN + c)) cfg.adc_cal[c].gain   <= kw;
        end
        for (int c = 0; c < N_OUT; c++) begin
          if (ra == 8'(R_DAC_OFS + c))  cfg.dac_cal[c].offset <= wdata[IO_W-1:0];
          if (ra == 8'(R_DAC_GAIN + c)) cfg.dac_cal[c].gain   <= kw;
        end
        for (int j = 0; j < N_ST; j++) begin
          for (int i = 0; i < N_IN; i++)
            if (ra == 8'(R_A + 2*j + i)) cfg.a[j][i] <= kw;
          if (ra == 8'(R_B + j)) cfg.b[j] <= kw;
          if (ra == 8'(R_SLICE + 16*j + 0)) cfg.slice[j].u_factor    <= kw;
          if (ra == 8'(R_SLICE + 16*j + 1)) cfg.slice[j].x_factor    <= kw;
          if (ra == 8'(R_SLICE + 16*j + 2)) cfg.slice[j].xdot_factor <= kw;
          if (ra == 8'(R_SLICE + 16*j + 3)) cfg.slice[j].kappa       <= kw;
          if (ra == 8'(R_SLICE + 16*j + 4)) cfg.slice[j].lambda      <= sw;
          if (ra == 8'(R_SLICE + 16*j + 5)) cfg.slice[j].kappa_qd    <= kw;
          if (ra == 8'(R_SLICE + 16*j + 6)) cfg.slice[j].lambda_qd   <= sw;
          if (ra == 8'(R_SLICE + 16*j + 7)) cfg.slice[j].kappa_q     <= kw;
          if (ra == 8'(R_SLICE + 16*j + 8)) cfg.slice[j].lambda_q    <= sw;
        end
        for (int k = 0; k < N_OUT; k++)
          for (int j = 0; j < N_ST; j++) begin
            if (ra == 8'(R_D + 3*k + j)) cfg.d[k][j] <= kw;
            if (ra == 8'(R_OUTSEL)) cfg.out_sel[k][j] <= wdata[3*k + j];
          end
        for (int n = 0; n < N_NLF; n++) begin
          if (ra == 8'(R_NLF_IN + n))  cfg.nlf[n].in_scale  <= kw;
          if (ra == 8'(R_NLF_OUT + n)) cfg.nlf[n].out_scale <= kw;
        end
      end
    end
  end
endmodule
