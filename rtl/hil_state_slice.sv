// hil_state_slice: one degree of freedom of the HIL plant,
//   qdd[n] = xdot_factor * f(qd[n]) + x_factor * g(q[n]) + u_factor * h(z[n]),
// integrated by hil_integrator. f, g and h are configurable nonlinear functions (hil_nlf,
// "xdot_nlf", "x_nlf", "u_nlf"), each with a primary and an alternate table chosen per
// sample by alt_sel[2:0] = {xdot, x, u}; the factors are 18-bit constants (10 fraction bits).
//
// Timing: `start` (one clock every SLICE_PERIOD = 36 clocks) samples z and the slice's own
// q, qd. The NLFs take 12 clocks, the factor products and their sum 2 more, the integrator 9;
// the new q, qd are in the integrator 24 clocks after start and appear on the outputs, with
// `done`, 35 clocks after the edge that samples start, so one sample takes the paper's slice
// delay of 36 clocks. The loop from q back to
// the NLF input closes within one sample period, so the next start already sees the new state.
// The equation, the three NLFs and the factor names follow the paper's slice description and
// its configuration example (u_factor, x_factor, xdot_factor); the schedule is this design's.
module hil_state_slice
  import hil_pkg::*;
#(
  parameter int unsigned NLF_BASE = NLF_SL0    // index of this slice's u_nlf in the NLF numbering
) (
  input  logic                clk,
  input  logic                clear,
  input  logic                start,
  input  sig_t                z,
  input  slice_cfg_t          cfg,
  input  nlf_cfg_t [2:0]      nlf_cfg,    // {xdot, x, u}
  input  logic     [2:0]      alt_sel,    // {xdot, x, u}
  input  tw_t                 tw,
  output sig_t                q,
  output sig_t                qd,
  output sig_t                qdd_mon,    // last acceleration, for observation
  output logic                done
);
  localparam int unsigned PW = SIG_W + K_W;

  sig_t z_c, q_c, qd_c;
  sig_t q_int, qd_int;
  sig_t [2:0] nl;                          // {f(qd), g(q), h(z)}
  sig_t [2:0] nl_in;
  assign nl_in = {qd_c, q_c, z_c};

  for (genvar n = 0; n < 3; n++) begin : g_nlf
    hil_nlf #(.HAS_ALT(1'b1)) u_nlf (
      .clk, .x(nl_in[n]), .y(nl[n]), .cfg(nlf_cfg[n]), .alt_sel(alt_sel[n]),
      .tw_en(tw.en && tw.nlf == 5'(NLF_BASE + n)), .tw_alt(tw.alt), .tw_addr(tw.addr),
      .tw_data(tw.data)
    );
  end

  logic [5:0] t;                           // clocks since start, 0 = idle
  logic signed [PW-1:0]  pu, px, pxd;
  logic signed [PW+1:0]  psum;
  assign psum = (PW+2)'(pu) + (PW+2)'(px) + (PW+2)'(pxd);
  sig_t qdd;
  logic int_start;

  always_ff @(posedge clk) begin
    if (clear) begin
      t <= '0; z_c <= '0; q_c <= '0; qd_c <= '0;
      pu <= '0; px <= '0; pxd <= '0; qdd <= '0;
      q <= '0; qd <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        t <= 6'd1;
        z_c <= z; q_c <= q_int; qd_c <= qd_int;
      end else if (t != 0) begin
        t <= (t == 6'(SLICE_PERIOD - 1)) ? 6'd0 : t + 6'd1;
      end
      if (t == 6'd13) begin
        pu  <= nl[0] * cfg.u_factor;
        px  <= nl[1] * cfg.x_factor;
        pxd <= nl[2] * cfg.xdot_factor;
      end
      if (t == 6'd14) qdd <= sat_sig(96'(psum) >>> K_FRAC);
      if (t == 6'(SLICE_PERIOD - 1)) begin
        q    <= q_int;
        qd   <= qd_int;
        done <= 1'b1;
      end
    end
  end
  assign int_start = (t == 6'd15);
  assign qdd_mon   = qdd;

  hil_integrator u_int (
    .clk, .clear, .start(int_start), .qdd, .cfg, .qd(qd_int), .q(q_int), .done()
  );
endmodule
