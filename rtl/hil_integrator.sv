// hil_integrator: semi-implicit linear multistep integrator of one state slice.
//
//   qd[n+1] = qd[n] + t_s * (3/2 qdd[n] - 1/2 qdd[n-1])      (Adams-Bashforth, upper path)
//   q[n+1]  = q[n]  + t_s/2 * (qd[n+1] + qd[n])                (Adams-Moulton, lower path)
//
// The time step is split as t_s = kappa * 2**lambda: each increment is multiplied by kappa
// (18-bit constant, 10 fraction bits) and shifted by lambda (signed: positive = left) into a
// 47-bit accumulator with 39 fraction bits. The accumulator holds the state in a scaled unit;
// the rescaling stage shifts it by lambda_qd (lambda_q), cuts a 25-bit word with 17 fraction
// bits out of it and multiplies it by kappa_qd (kappa_q) to recover the state magnitude.
//
// Interface: `start` marks a valid qdd sample; qd and q (25-bit, 17 fraction bits) change
// 9 clocks after the edge that samples `start`, when `done` pulses. `clear` resets both
// accumulators and the histories.
//
// The equations, the kappa/2**lambda scaling, the 47-bit accumulator and the rescaling block
// follow the paper's integrator figure and text; the order of operations inside each path,
// the word cut between accumulator and rescaling and the signed shift encoding are this
// design's choices.
module hil_integrator
  import hil_pkg::*;
(
  input  logic       clk,
  input  logic       clear,
  input  logic       start,
  input  sig_t       qdd,
  input  slice_cfg_t cfg,
  output sig_t       qd,
  output sig_t       q,
  output logic       done
);
  localparam int unsigned PW  = SIG_W + K_W + 1;
  localparam int unsigned UP  = ACC_FRAC - (SIG_FRAC + K_FRAC);   // 12: product -> accumulator
  localparam int unsigned CUT = ACC_FRAC - SIG_FRAC;              // 22: accumulator -> signal

  logic [8:0] ph;                 // one-hot phase after start
  sig_t qdd_prev, qd_hist, qd_next;
  logic signed [SIG_W:0] v1, p1;
  logic signed [PW-1:0]  pv, pp;
  acc_t acc_v, acc_q;
  sig_t wv, wq;
  logic signed [PW-1:0]  rv, rq;
  assign rv = wv * cfg.kappa_qd;
  assign rq = wq * cfg.kappa_q;

  always_ff @(posedge clk) begin
    if (clear) begin
      ph <= '0; qdd_prev <= '0; qd_hist <= '0; qd_next <= '0;
      v1 <= '0; p1 <= '0; pv <= '0; pp <= '0;
      acc_v <= '0; acc_q <= '0; wv <= '0; wq <= '0;
      qd <= '0; q <= '0; done <= 1'b0;
    end else begin
      ph   <= {ph[7:0], start};
      done <= ph[8];
      if (start) begin
        v1       <= (SIG_W+1)'(qdd) + (((SIG_W+1)'(qdd) - (SIG_W+1)'(qdd_prev)) >>> 1);
        qdd_prev <= qdd;
      end
      if (ph[0]) pv    <= v1 * cfg.kappa;
      if (ph[1]) acc_v <= acc_v + ACC_W'(sshift(96'(pv) <<< UP, cfg.lambda));
      if (ph[2]) wv    <= sat_sig(sshift(96'(acc_v), cfg.lambda_qd) >>> CUT);
      if (ph[3]) qd_next <= sat_sig(96'(rv) >>> K_FRAC);
      if (ph[4]) begin
        p1      <= ((SIG_W+1)'(qd_next) + (SIG_W+1)'(qd_hist)) >>> 1;
        qd_hist <= qd_next;
      end
      if (ph[5]) pp    <= p1 * cfg.kappa;
      if (ph[6]) acc_q <= acc_q + ACC_W'(sshift(96'(pp) <<< UP, cfg.lambda));
      if (ph[7]) wq    <= sat_sig(sshift(96'(acc_q), cfg.lambda_q) >>> CUT);
      if (ph[8]) begin
        q  <= sat_sig(96'(rq) >>> K_FRAC);
        qd <= qd_hist;
      end
    end
  end
endmodule
