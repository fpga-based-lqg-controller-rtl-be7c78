// hil_input_mapping: maps the simulator inputs onto the three slice inputs,
//   z_j = b_j * xi_j + sum_i a_{j,i} * alpha_i(u_i),   j = 1..N_ST,
// where alpha_i is a configurable nonlinear function (hil_nlf) acting on input i only and
// xi_j is the noise sample of slice j. Cross-channel mixing happens only through a_{j,i}.
//
// u_i arrive as 14-bit words with 12 fraction bits and are widened to the 25-bit signal
// format (17 fraction bits) before the NLF. Products of 25-bit signals and 18-bit constants
// (10 fraction bits) are summed at full width and saturated to 25 bits.
//
// Timing: runs on every 250 MHz clock. u to z: NLF_LAT (12) + IMAP_LIN_LAT (6) = 18 clocks;
// xi to z: 6 clocks. Structure (two alpha NLFs, a 3x2 weight matrix plus one noise weight
// per slice, one adder per slice) is as drawn in the paper's input mapping figure; latencies
// are the paper's delay-table figures; pipeline cut points are this design's choice.
module hil_input_mapping
  import hil_pkg::*;
(
  input  logic                  clk,
  input  io_t      [N_IN-1:0]   u,
  input  sig_t     [N_ST-1:0]   xi,
  input  kconst_t  [N_ST-1:0][N_IN-1:0] a,
  input  kconst_t  [N_ST-1:0]   b,
  input  nlf_cfg_t [N_IN-1:0]   nlf_cfg,
  input  tw_t                   tw,
  output sig_t     [N_ST-1:0]   z
);
  localparam int unsigned PW = SIG_W + K_W;

  sig_t [N_IN-1:0] alpha;
  for (genvar i = 0; i < N_IN; i++) begin : g_alpha
    hil_nlf #(.HAS_ALT(1'b0)) u_nlf (
      .clk, .x(sig_t'(u[i]) <<< (SIG_FRAC - IO_FRAC)), .y(alpha[i]),
      .cfg(nlf_cfg[i]), .alt_sel(1'b0),
      .tw_en(tw.en && tw.nlf == 5'(NLF_IN0 + i)), .tw_alt(1'b0), .tw_addr(tw.addr), .tw_data(tw.data)
    );
  end

  // L1: register; L2: multiply; L3: product register; L4/L5: adder tree; L6: saturation
  sig_t [N_IN-1:0]  l1_al;
  sig_t [N_ST-1:0]  l1_xi;
  logic signed [PW-1:0] l2_pa [N_ST][N_IN];
  logic signed [PW-1:0] l2_pb [N_ST];
  logic signed [PW-1:0] l3_pa [N_ST][N_IN];
  logic signed [PW-1:0] l3_pb [N_ST];
  logic signed [PW+1:0] l4_s  [N_ST];
  logic signed [PW+1:0] l4_n  [N_ST];
  logic signed [PW+1:0] l5_s  [N_ST];
  always_ff @(posedge clk) begin
    l1_al <= alpha;
    l1_xi <= xi;
    for (int j = 0; j < N_ST; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        l2_pa[j][i] <= l1_al[i] * a[j][i];
        l3_pa[j][i] <= l2_pa[j][i];
      end
      l2_pb[j] <= l1_xi[j] * b[j];
      l3_pb[j] <= l2_pb[j];
      l4_s[j]  <= (PW+2)'(l3_pa[j][0]) + (PW+2)'(l3_pa[j][1]);
      l4_n[j]  <= (PW+2)'(l3_pb[j]);
      l5_s[j]  <= l4_s[j] + l4_n[j];
      z[j]     <= sat_sig(96'(l5_s[j]) >>> K_FRAC);
    end
  end
endmodule
