// hil_noise_gen: Gaussian white-noise source of the HIL simulator.
//
// A 24-bit Galois LFSR with the primitive polynomial x^24 + x^23 + x^22 + x^17 + 1 (period
// 2^24 - 1) supplies uniform numbers; the Box-Muller transform turns them into Gaussian ones.
// On every `step` pulse (once per slice sample, about 7 MHz) the LFSR advances by 24 bit
// steps, so that each sample carries 24 fresh bits: the upper 10 bits give u1, the lower 10
// bits u2, both taken as (k + 0.5) / 1024 inside (0, 1). Two ROMs computed at elaboration hold
// sqrt(-2 ln u1) (12 fraction bits) and cos(2 pi u2) (14 fraction bits); sin is the cosine
// table read a quarter turn earlier. The output is xi = (x1 + x2) / sqrt(2), unit power,
// as a 25-bit word with 17 fraction bits.
//
// Timing: xi changes 5 clocks after a `step` pulse and holds until the next one. The LFSR
// width, polynomial, Box-Muller and the combination c*(x1+x2) are the paper's; the 24-step leap
// per sample, the 10/10 bit split, the ROM sizes and formats and the seed are this design's.
module hil_noise_gen
  import hil_pkg::*;
#(
  parameter logic [23:0] SEED = 24'hACE1F3
) (
  input  logic clk,
  input  logic rst,
  input  logic step,
  output sig_t xi,
  output logic [23:0] lfsr_state
);
  localparam int unsigned UB = 10;                 // bits per uniform number
  localparam logic [23:0] TAPS = 24'hE10000;       // x^24 + x^23 + x^22 + x^17 (+1)
  localparam logic signed [15:0] C_XI = 16'sd11585; // 1/sqrt(2), 14 fraction bits

  logic [23:0] lfsr, lfsr_n;
  always_comb begin
    lfsr_n = lfsr;
    for (int i = 0; i < 24; i++) lfsr_n = lfsr_n[0] ? ((lfsr_n >> 1) ^ TAPS) : (lfsr_n >> 1);
  end
  always_ff @(posedge clk) begin
    if (rst)       lfsr <= SEED;
    else if (step) lfsr <= lfsr_n;
  end
  assign lfsr_state = lfsr;

  // ROM contents, computed during elaboration
  typedef logic signed [15:0] rom_t [2**UB];
  function automatic rom_t gen_rad();
    rom_t t;
    for (int i = 0; i < 2**UB; i++)
      t[i] = 16'($rtoi($sqrt(-2.0 * $ln((real'(i) + 0.5) / real'(2**UB))) * 4096.0 + 0.5));
    return t;
  endfunction
  function automatic rom_t gen_cos();
    rom_t t;
    for (int i = 0; i < 2**UB; i++)
      t[i] = 16'($rtoi($floor($cos(2.0 * 3.14159265358979 * (real'(i) + 0.5) / real'(2**UB))
                               * 16384.0 + 0.5)));
    return t;
  endfunction
  localparam rom_t RAD_ROM = gen_rad();
  localparam rom_t COS_ROM = gen_cos();

  logic [UB-1:0] u1, u2, u2s;
  assign u1  = lfsr[23 -: UB];
  assign u2  = lfsr[UB-1:0];
  assign u2s = u2 - UB'(2**(UB-2));               // sin(t) = cos(t - pi/2)

  logic               st1, st2, st3;
  logic signed [15:0] r1, c1, s1;
  logic signed [31:0] x1, x2;                     // 26 fraction bits
  logic signed [32:0] sum;
  logic signed [48:0] scaled;
  assign scaled = sum * C_XI;                      // 40 fraction bits
  always_ff @(posedge clk) begin
    if (rst) begin
      st1 <= 1'b0; st2 <= 1'b0; st3 <= 1'b0;
      r1 <= '0; c1 <= '0; s1 <= '0; x1 <= '0; x2 <= '0; sum <= '0;
    end else begin
      st1 <= step; st2 <= st1; st3 <= st2;
      if (st1) begin
        r1 <= RAD_ROM[u1];
        c1 <= COS_ROM[u2];
        s1 <= COS_ROM[u2s];
      end
      if (st2) begin
        x1 <= r1 * c1;
        x2 <= r1 * s1;
      end
      if (st3) sum <= 33'(x1) + 33'(x2);
    end
  end
  logic st4;
  always_ff @(posedge clk) begin
    if (rst) st4 <= 1'b0;
    else     st4 <= st3;
  end
  sig_t xi_r;
  always_ff @(posedge clk) begin
    if (rst)      xi_r <= '0;
    else if (st4) xi_r <= sat_sig(96'(scaled) >>> (40 - SIG_FRAC));
  end
  assign xi = xi_r;
endmodule
