// lqg_pkg: sizes, word formats and the parameter-set record of the LQG controller.
//
// Formats follow the controller's fixed-point table: estimated states 25 bits with 22
// fraction bits; feedback and detection signals 14 bits with 13 fraction bits; matrix
// residues 18 bits with 14 fraction bits; per-element shift exponents of 5 bits for
// (Ad - Ld C), Bd and Ld and of 6 bits for Kd. An element's value is res * 2**-sh.
// The parameter word layout and addresses are this design's choice.
package lqg_pkg;

  localparam int unsigned N_X = 7;    // states: x, dx, y, dy, z, dz, phi
  localparam int unsigned N_U = 2;    // feedback outputs (DACs)
  localparam int unsigned N_Y = 2;    // detection inputs (ADCs)

  localparam int unsigned X_W = 25, X_FRAC = 22;
  localparam int unsigned U_W = 14, U_FRAC = 13;
  localparam int unsigned C_W = 18, C_FRAC = 14;
  localparam int unsigned SH_W = 5, SHK_W = 6;

  // 125 MHz clock, one controller sample every 8 clocks: T_s = 64 ns.
  localparam int unsigned SAMPLE_DIV = 8;

  // Operands of one row product are all brought to the state format (25 bits, 22 fraction
  // bits); u and chi are shifted left by X_FRAC - U_FRAC = 9 to get there.
  localparam int unsigned ROW_TERMS = N_X + N_U + N_Y;   // 11
  localparam int unsigned SUM_W     = 48;                // 36 fraction bits

  typedef logic signed [X_W-1:0] xw_t;
  typedef logic signed [U_W-1:0] uw_t;

  typedef struct packed {
    logic signed [C_W-1:0] res;
    logic [SH_W-1:0]       sh;
  } coef_t;

  typedef struct packed {
    logic signed [C_W-1:0] res;
    logic [SHK_W-1:0]      sh;
  } kcoef_t;

  typedef struct packed {
    coef_t  [N_X-1:0][N_X-1:0] m;   // Ad - Ld C
    coef_t  [N_X-1:0][N_U-1:0] b;   // Bd
    coef_t  [N_X-1:0][N_Y-1:0] l;   // Ld
    kcoef_t [N_U-1:0][N_X-1:0] k;   // Kd
  } lqg_set_t;

  // Parameter word addresses: m[r][c] at 7r+c, b[r][i] at 49+2r+i, l[r][i] at 63+2r+i,
  // k[i][c] at 77+7i+c. Data word: bits 17:0 residue, bits 23:18 shift.
  localparam int unsigned A_M = 0, A_B = 49, A_L = 63, A_K = 77, N_PWORDS = 91;

  // Recorder channels: 0..1 chi, 2..3 u, 4..10 estimated states.
  localparam int unsigned N_CH = N_Y + N_U + N_X;

endpackage
