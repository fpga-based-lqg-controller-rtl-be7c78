// lqg_param_bank: the controller's two parameter sets.
//
// Each set has a staging copy, written word by word over a simple write port (we, wset,
// waddr, wdata; addresses and data layout in lqg_pkg), and an active copy. A commit pulse
// for a set marks its staging copy for transfer; the transfer of all matrices of that set
// happens in a single clock, at the next sample boundary (sample_end), so the engine never
// computes with a mix of old and new coefficients. `sel` chooses which active set drives the
// engine; a change of `sel` also takes effect at a sample boundary, so switching sets does
// not stop the controller.
//
// Timing: params changes only in the clock in which sample_end is high. The two sets, the
// staging registers and the simultaneous update are from the paper; the write port, the
// deferral to the sample boundary and the reset state (all zero, set 0 selected) are this
// design's choices.
module lqg_param_bank
  import lqg_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        we,
  input  logic        wset,
  input  logic [6:0]  waddr,
  input  logic [23:0] wdata,
  input  logic [1:0]  commit,
  input  logic        sel,
  input  logic        sample_end,
  output lqg_set_t    params,
  output logic        active_sel
);
  lqg_set_t stage  [2];
  lqg_set_t active [2];
  logic [1:0] pending;

  function automatic lqg_set_t put(input lqg_set_t s, input logic [6:0] a, input logic [23:0] d);
    lqg_set_t r;
    r = s;
    for (int i = 0; i < N_X; i++) begin
      for (int c = 0; c < N_X; c++)
        if (a == 7'(A_M + N_X*i + c)) r.m[i][c] = '{res: d[17:0], sh: d[18 +: SH_W]};
      for (int c = 0; c < N_U; c++)
        if (a == 7'(A_B + N_U*i + c)) r.b[i][c] = '{res: d[17:0], sh: d[18 +: SH_W]};
      for (int c = 0; c < N_Y; c++)
        if (a == 7'(A_L + N_Y*i + c)) r.l[i][c] = '{res: d[17:0], sh: d[18 +: SH_W]};
    end
    for (int i = 0; i < N_U; i++)
      for (int c = 0; c < N_X; c++)
        if (a == 7'(A_K + N_X*i + c)) r.k[i][c] = '{res: d[17:0], sh: d[18 +: SHK_W]};
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      stage[0] <= '0; stage[1] <= '0; active[0] <= '0; active[1] <= '0;
      pending <= '0; active_sel <= 1'b0;
    end else begin
      if (we) stage[wset] <= put(stage[wset], waddr, wdata);
      pending <= pending | commit;
      if (sample_end) begin
        for (int s = 0; s < 2; s++)
          if (pending[s] || commit[s]) active[s] <= stage[s];
        pending    <= '0;
        active_sel <= sel;
      end
    end
  end
  assign params = active[active_sel];
endmodule
