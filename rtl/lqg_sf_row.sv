// lqg_sf_row: one row of a shift-float matrix-vector product,
//   sum_k (a_k * x_k) * 2**-s_k,
// where each matrix element is a fixed-point residue a_k with its own unsigned exponent s_k
// (a barrel shift after each multiplier). Residues are 18 bits, operands 25 bits, matching
// the 25x18 multipliers of the target DSP slices; each product is shifted right by its s_k
// (arithmetic, truncating) and the N products are summed at full width.
//
// Purely combinational; the caller registers the result. Output fraction bits = residue
// fraction bits + operand fraction bits (14 + 22 = 36 in the controller). The shift-float
// encoding is the paper's; truncation towards minus infinity and the full-width sum are this
// design's choices.
module lqg_sf_row #(
  parameter int unsigned N     = 11,
  parameter int unsigned CW    = 18,
  parameter int unsigned SW    = 5,
  parameter int unsigned XW    = 25,
  parameter int unsigned SUMW  = 48
) (
  input  logic signed [N-1:0][CW-1:0] a,
  input  logic        [N-1:0][SW-1:0] s,
  input  logic signed [N-1:0][XW-1:0] x,
  output logic signed [SUMW-1:0]      sum
);
  localparam int unsigned PW = CW + XW;
  logic signed [PW-1:0] p [N];
  always_comb begin
    sum = '0;
    for (int k = 0; k < N; k++) begin
      p[k] = $signed(a[k]) * $signed(x[k]);
      sum  = sum + SUMW'(p[k] >>> s[k]);
    end
  end
endmodule
