// hil_pkg: word formats, sizes, latencies and configuration records shared by the
// hardware-in-the-loop (HIL) plant simulator.
//
// Formats follow the simulator's datatype table: 14-bit I/O words with 12 fraction bits,
// 25-bit state/signal words with 17 fraction bits, 18-bit configurable constants with 10
// fraction bits, a 47-bit integration accumulator with 39 fraction bits and 16-bit LUT words
// with 14 fraction bits. Latencies (in 250 MHz clock cycles) follow the simulator's delay
// table. The NLF numbering, the register map and the signed shift fields are this design's
// own choices.
package hil_pkg;

  localparam int unsigned N_ST  = 3;   // state slices (degrees of freedom)
  localparam int unsigned N_IN  = 2;   // simulator inputs u_i
  localparam int unsigned N_OUT = 2;   // simulator outputs y_k

  localparam int unsigned IO_W    = 14, IO_FRAC   = 12;
  localparam int unsigned SIG_W   = 25, SIG_FRAC  = 17;
  localparam int unsigned K_W     = 18, K_FRAC    = 10;
  localparam int unsigned ACC_W   = 47, ACC_FRAC  = 39;
  localparam int unsigned LUT_W   = 16, LUT_FRAC  = 14;
  localparam int unsigned LUT_AW  = 10;                 // 2**10 LUT entries
  localparam int unsigned SH_W    = 6;                  // signed shift amount (2**lambda)

  localparam int unsigned SLICE_PERIOD = 36;  // clocks per slice sample: 250 MHz / 36 = 6.944 MS/s
  localparam int unsigned NLF_LAT      = 12;  // worst-case NLF latency
  localparam int unsigned IMAP_LIN_LAT = 6;   // input mapping, linear part
  localparam int unsigned OMAP_LIN_LAT = 7;   // output mapping, linear part
  localparam int unsigned CAL_LAT      = 4;   // ADC / DAC calibration

  // NLF numbering: 0..1 input alpha_i, then three per slice (u, x, xdot), then the six
  // output betas, beta_{j,k} at index NLF_OUT0 + 3*k + j.
  localparam int unsigned NLF_IN0  = 0;
  localparam int unsigned NLF_SL0  = N_IN;
  localparam int unsigned NLF_OUT0 = N_IN + 3 * N_ST;
  localparam int unsigned N_NLF    = N_IN + 3 * N_ST + N_ST * N_OUT;  // 17
  localparam int unsigned N_NLFSW  = 3 * N_ST;   // slice NLFs that have an alternate table

  typedef logic signed [IO_W-1:0]  io_t;
  typedef logic signed [SIG_W-1:0] sig_t;
  typedef logic signed [K_W-1:0]   kconst_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [LUT_W-1:0] lut_t;
  typedef logic signed [SH_W-1:0]  shift_t;

  typedef struct packed {
    kconst_t in_scale;    // maps the input onto [-1, 1)
    kconst_t out_scale;   // rescales the table value
    logic    bypass;      // 1: output = input (delayed by the same latency)
  } nlf_cfg_t;

  typedef struct packed {
    kconst_t u_factor;    // weight of u_nlf(z)
    kconst_t x_factor;    // weight of x_nlf(q)      (restoring force g)
    kconst_t xdot_factor; // weight of xdot_nlf(qdot) (damping f)
    kconst_t kappa;       // time-step mantissa, t_s = kappa * 2**lambda
    shift_t  lambda;
    kconst_t kappa_qd;    // velocity rescaling
    shift_t  lambda_qd;
    kconst_t kappa_q;     // position rescaling
    shift_t  lambda_q;
  } slice_cfg_t;

  typedef struct packed {
    io_t     offset;
    kconst_t gain;
  } cal_cfg_t;

  typedef struct packed {
    cal_cfg_t [N_IN-1:0]              adc_cal;
    cal_cfg_t [N_OUT-1:0]             dac_cal;
    kconst_t  [N_ST-1:0][N_IN-1:0]    a;        // a_{j,i}
    kconst_t  [N_ST-1:0]              b;        // b_j, noise weight
    kconst_t  [N_OUT-1:0][N_ST-1:0]   d;        // d_{k,j}
    logic     [N_OUT-1:0][N_ST-1:0]   out_sel;  // 1: beta_{j,k} reads qdot_j, 0: q_j
    slice_cfg_t [N_ST-1:0]            slice;
    nlf_cfg_t [N_NLF-1:0]             nlf;
    logic     [N_NLFSW-1:0]           nlfsw_iomask; // 1: alternate select from the pin
    logic     [N_NLFSW-1:0]           nlfsw_sel;    // software alternate select
  } hil_cfg_t;

  // One NLF table write, broadcast to all NLFs; the one whose index matches takes it.
  typedef struct packed {
    logic              en;
    logic [4:0]        nlf;
    logic              alt;
    logic [LUT_AW-1:0] addr;
    lut_t              data;
  } tw_t;

  // Register map of hil_cfg_regs (word addresses, bit 19 = 0). Bit 19 = 1 selects an NLF
  // table entry: addr[15:11] NLF index, addr[10] alternate table, addr[9:0] entry.
  localparam int unsigned R_CTRL      = 0;    // bit0 run, bit1 reset integrators (self-clearing)
  localparam int unsigned R_NLFSW_IOM = 1;
  localparam int unsigned R_NLFSW_SEL = 2;
  localparam int unsigned R_NLF_BYP   = 3;    // one bit per NLF
  localparam int unsigned R_ADC_OFS   = 4;    // +ch
  localparam int unsigned R_ADC_GAIN  = 6;
  localparam int unsigned R_DAC_OFS   = 8;
  localparam int unsigned R_DAC_GAIN  = 10;
  localparam int unsigned R_A         = 16;   // + 2*j + i
  localparam int unsigned R_B         = 24;   // + j
  localparam int unsigned R_D         = 32;   // + 3*k + j
  localparam int unsigned R_OUTSEL    = 40;   // bit 3*k + j
  localparam int unsigned R_SLICE     = 64;   // + 16*j + field (0..8 in slice_cfg_t order)
  localparam int unsigned R_NLF_IN    = 128;  // + n
  localparam int unsigned R_NLF_OUT   = 160;  // + n

  function automatic sig_t sat_sig(input logic signed [95:0] v);
    if (v > 96'sd16777215)       return sig_t'(25'sh0FFFFFF);
    else if (v < -96'sd16777216) return sig_t'(25'sh1000000);
    else                         return v[SIG_W-1:0];
  endfunction

  function automatic io_t sat_io(input logic signed [95:0] v);
    if (v > 96'sd8191)       return io_t'(14'sh1FFF);
    else if (v < -96'sd8192) return io_t'(14'sh2000);
    else                     return v[IO_W-1:0];
  endfunction

  // Arithmetic shift by a signed amount: positive shifts left, negative right.
  function automatic logic signed [95:0] sshift(input logic signed [95:0] v, input shift_t s);
    if (s >= 0) return v <<< s;
    else        return v >>> (-int'(s));
  endfunction

endpackage
