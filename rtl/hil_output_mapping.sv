// hil_output_mapping: forms the simulator outputs from the slice states,
//   y_k = sum_j d_{k,j} * beta_{j,k}(q_j or qd_j),   k = 1..N_OUT,
// where a multiplexer per (j,k) picks displacement or velocity (out_sel[k][j] = 1: qd_j)
// and beta_{j,k} is a configurable nonlinear function (hil_nlf). The weighted sum (18-bit
// constants, 10 fraction bits) is converted to the 14-bit output format with 12 fraction
// bits and saturated.
//
// Timing: runs on every 250 MHz clock; q/qd to y takes NLF_LAT (12) + OMAP_LIN_LAT (7) = 19
// clocks. The structure (one multiplexer and one beta per pair, weights d_{k,j}, one adder per
// output) is as drawn in the paper's output mapping figure, the latencies are its delay-table
// figures; pipeline cut points are this design's choice.
module hil_output_mapping
  import hil_pkg::*;
(
  input  logic                            clk,
  input  sig_t     [N_ST-1:0]             q,
  input  sig_t     [N_ST-1:0]             qd,
  input  kconst_t  [N_OUT-1:0][N_ST-1:0]  d,
  input  logic     [N_OUT-1:0][N_ST-1:0]  out_sel,
  input  nlf_cfg_t [N_ST*N_OUT-1:0]       nlf_cfg,   // index 3*k + j
  input  tw_t                             tw,
  output io_t      [N_OUT-1:0]            y
);
  localparam int unsigned PW = SIG_W + K_W;

  sig_t [N_OUT-1:0][N_ST-1:0] beta;
  for (genvar k = 0; k < N_OUT; k++) begin : g_k
    for (genvar j = 0; j < N_ST; j++) begin : g_j
      hil_nlf #(.HAS_ALT(1'b0)) u_nlf (
        .clk, .x(out_sel[k][j] ? qd[j] : q[j]), .y(beta[k][j]),
        .cfg(nlf_cfg[N_ST*k+j]), .alt_sel(1'b0),
        .tw_en(tw.en && tw.nlf == 5'(NLF_OUT0 + N_ST*k + j)), .tw_alt(1'b0),
        .tw_addr(tw.addr), .tw_data(tw.data)
      );
    end
  end

  // L1 register, L2 multiply, L3 product register, L4 pair sum, L5 full sum,
  // L6 format conversion, L7 output register
  sig_t [N_OUT-1:0][N_ST-1:0] l1;
  logic signed [PW-1:0] l2 [N_OUT][N_ST];
  logic signed [PW-1:0] l3 [N_OUT][N_ST];
  logic signed [PW+1:0] l4a [N_OUT];
  logic signed [PW+1:0] l4b [N_OUT];
  logic signed [PW+1:0] l5 [N_OUT];
  io_t                  l6 [N_OUT];
  always_ff @(posedge clk) begin
    l1 <= beta;
    for (int k = 0; k < N_OUT; k++) begin
      for (int j = 0; j < N_ST; j++) begin
        l2[k][j] <= l1[k][j] * d[k][j];
        l3[k][j] <= l2[k][j];
      end
      l4a[k] <= (PW+2)'(l3[k][0]) + (PW+2)'(l3[k][1]);
      l4b[k] <= (PW+2)'(l3[k][2]);
      l5[k]  <= l4a[k] + l4b[k];
      l6[k]  <= sat_io(96'(l5[k]) >>> (SIG_FRAC + K_FRAC - IO_FRAC));
      y[k]   <= l6[k];
    end
  end
endmodule
