// lqg_engine: the LQG controller's arithmetic, one controller sample per 8 clocks.
//
//   u[n]      = -Kd xi[n]                                   (LQR law)
//   xi[n+1]   = (Ad - Ld C) xi[n] + Bd u[n] + Ld chi[n]     (Kalman filter, one-step form)
//
// with 7 states, 2 outputs u and 2 measurements chi. Every matrix element is a shift-float
// number (lqg_sf_row). The sample is computed row by row: in phase 0 the detection sample
// chi[n] is latched and both rows of u[n] are formed (two 7-term rows); in phases 1..7 one
// state row each is formed from the 11-term vector [xi; u; chi]; at the end of phase 7 all
// seven new states are committed together. With fb_en low the applied (and the estimator's)
// u is zero, so the filter keeps tracking the open-loop plant.
//
// Interface: chi and u are 14-bit words with 13 fraction bits; xi 25-bit with 22 fraction
// bits; params comes from lqg_param_bank and must not change except when sample_end is high.
// clear zeroes the estimate and u ("reset internal states").
// Timing: 125 MHz clock, SAMPLE_DIV = 8 clocks = 64 ns per sample. chi is sampled at the
// phase-0 edge; the u computed from it appears 8 clocks later (one sample). sample_start /
// sample_end are high in phase 0 / phase 7.
// The equations, word formats and the 64 ns period are the paper's; the 8-phase row schedule,
// saturation and truncation are this design's choices.
module lqg_engine
  import lqg_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                clear,
  input  logic                fb_en,
  input  lqg_set_t            params,
  input  uw_t  [N_Y-1:0]      chi,
  output uw_t  [N_U-1:0]      u,
  output xw_t  [N_X-1:0]      xi,
  output uw_t  [N_Y-1:0]      chi_s,     // chi as used in this sample
  output logic                sample_start,
  output logic                sample_end
);
  localparam int unsigned SH_UP = X_FRAC - U_FRAC;   // 9

  logic [2:0] phase;
  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + 3'd1;               // SAMPLE_DIV = 8
  end
  assign sample_start = (phase == 3'd0);
  assign sample_end   = (phase == 3'(SAMPLE_DIV - 1));

  // --- u rows: -Kd xi -----------------------------------------------------------------
  logic signed [N_U-1:0][SUM_W-1:0] usum;
  for (genvar i = 0; i < N_U; i++) begin : g_urow
    logic signed [N_X-1:0][C_W-1:0] ka;
    logic        [N_X-1:0][SHK_W-1:0] ks;
    for (genvar c = 0; c < N_X; c++) begin : g_c
      assign ka[c] = params.k[i][c].res;
      assign ks[c] = params.k[i][c].sh;
    end
    lqg_sf_row #(.N(N_X), .CW(C_W), .SW(SHK_W), .XW(X_W), .SUMW(SUM_W)) u_row (
      .a(ka), .s(ks), .x(xi), .sum(usum[i])
    );
  end

  // --- state row selected by the phase ----------------------------------------------
  logic [2:0] r;
  assign r = phase - 3'd1;                        // row index in phases 1..7
  logic signed [ROW_TERMS-1:0][C_W-1:0]  ra;
  logic        [ROW_TERMS-1:0][SH_W-1:0] rs;
  logic signed [ROW_TERMS-1:0][X_W-1:0]  rx;
  always_comb begin
    for (int c = 0; c < N_X; c++) begin
      ra[c] = params.m[r][c].res;  rs[c] = params.m[r][c].sh;  rx[c] = xi[c];
    end
    for (int c = 0; c < N_U; c++) begin
      ra[N_X+c] = params.b[r][c].res;  rs[N_X+c] = params.b[r][c].sh;
      rx[N_X+c] = X_W'($signed(u[c])) <<< SH_UP;
    end
    for (int c = 0; c < N_Y; c++) begin
      ra[N_X+N_U+c] = params.l[r][c].res;  rs[N_X+N_U+c] = params.l[r][c].sh;
      rx[N_X+N_U+c] = X_W'($signed(chi_s[c])) <<< SH_UP;
    end
  end
  logic signed [SUM_W-1:0] xsum;
  lqg_sf_row #(.N(ROW_TERMS), .CW(C_W), .SW(SH_W), .XW(X_W), .SUMW(SUM_W)) u_xrow (
    .a(ra), .s(rs), .x(rx), .sum(xsum)
  );

  function automatic xw_t sat_x(input logic signed [SUM_W-1:0] v);   // 36 -> 22 fraction bits
    logic signed [SUM_W-1:0] t;
    t = v >>> (C_FRAC);
    if (t > SUM_W'((2 ** (X_W - 1)) - 1)) return xw_t'({1'b0, {(X_W-1){1'b1}}});
    if (t < -SUM_W'(2 ** (X_W - 1)))      return xw_t'({1'b1, {(X_W-1){1'b0}}});
    return t[X_W-1:0];
  endfunction
  function automatic uw_t sat_neg_u(input logic signed [SUM_W-1:0] v); // -(36 -> 13 fraction)
    logic signed [SUM_W-1:0] t;
    t = -(v >>> (C_FRAC + X_FRAC - U_FRAC));
    if (t > SUM_W'((2 ** (U_W - 1)) - 1)) return uw_t'({1'b0, {(U_W-1){1'b1}}});
    if (t < -SUM_W'(2 ** (U_W - 1)))      return uw_t'({1'b1, {(U_W-1){1'b0}}});
    return t[U_W-1:0];
  endfunction

  xw_t [N_X-1:0] xn;
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      xi <= '0; xn <= '0; u <= '0; chi_s <= '0;
    end else begin
      if (phase == 3'd0) begin
        chi_s <= chi;
        for (int i = 0; i < N_U; i++) u[i] <= fb_en ? sat_neg_u(usum[i]) : '0;
      end else begin
        xn[r] <= sat_x(xsum);
        if (phase == 3'(SAMPLE_DIV - 1)) begin
          for (int c = 0; c < N_X - 1; c++) xi[c] <= xn[c];
          xi[N_X-1] <= sat_x(xsum);
        end
      end
    end
  end
endmodule
