// hil_nlf: configurable nonlinear function of the HIL simulator, evaluated by table lookup
// with linear interpolation.
//
// The input x (25-bit, 17 fraction bits) is multiplied by cfg.in_scale and saturated onto
// the normalized interval [-1, 1). The AW most significant bits of that value, in offset
// binary, address the table; the remaining bits are the interpolation fraction. Entry i holds
// f(-1 + 2*i/2**AW) as a 16-bit word with 14 fraction bits. The two neighbouring entries are
// read in the same cycle, the result f_i + (f_{i+1}-f_i)*frac is formed and multiplied by
// cfg.out_scale back into the 25-bit signal format. The last entry is not interpolated
// (there is no entry above it). With cfg.bypass the delayed input is passed through instead.
//
// The table sits in two single-write/single-read RAM banks, even and odd entries, so that
// entries i and i+1 are always in different banks and one lookup needs one read per bank.
// With HAS_ALT each bank holds a primary and an alternate table; alt_sel picks one per sample.
// tw_* writes one entry at run time (the table is reconfigurable while running).
//
// Timing: fully pipelined, one evaluation per clock, latency NLF_LAT = 12 clocks from x to y
// whether bypassed or not. The paper gives the LUT size, word width, address/fraction split,
// the two-port RAM and the 12-cycle worst-case latency; the even/odd banking, the scaling
// multipliers, the saturation and the fixed latency in bypass are this design's choices.
module hil_nlf
  import hil_pkg::*;
#(
  parameter int unsigned AW      = LUT_AW,
  parameter bit          HAS_ALT = 1'b1
) (
  input  logic          clk,
  input  sig_t          x,
  output sig_t          y,
  input  nlf_cfg_t      cfg,
  input  logic          alt_sel,
  input  logic          tw_en,
  input  logic          tw_alt,
  input  logic [AW-1:0] tw_addr,
  input  lut_t          tw_data
);
  localparam int unsigned FW  = SIG_W - AW;        // interpolation fraction bits
  localparam int unsigned NT  = HAS_ALT ? 2 : 1;
  localparam int unsigned BD  = NT * (2 ** (AW - 1)); // words per bank

  lut_t bank_e [BD];
  lut_t bank_o [BD];

  // table write port
  localparam int unsigned IW = $clog2(BD);
  logic [IW-1:0] w_idx, re_idx, ro_idx;
  logic [AW-2:0] rd_e, rd_o;
  logic          s4_alt;
  if (HAS_ALT) begin : g_alt
    assign w_idx  = {tw_alt, tw_addr[AW-1:1]};
    assign re_idx = {s4_alt, rd_e};
    assign ro_idx = {s4_alt, rd_o};
  end else begin : g_noalt
    assign w_idx  = tw_addr[AW-1:1];
    assign re_idx = rd_e;
    assign ro_idx = rd_o;
  end
  always_ff @(posedge clk) begin
    if (tw_en && !tw_addr[0]) bank_e[w_idx] <= tw_data;
    if (tw_en &&  tw_addr[0]) bank_o[w_idx] <= tw_data;
  end

  // s1..s3: input register, scaling, normalization
  sig_t                    s1_x;
  logic signed [SIG_W+K_W-1:0] s2_p;
  sig_t                    s3_n;
  logic                    s1_alt, s2_alt, s3_alt;
  always_ff @(posedge clk) begin
    s1_x   <= x;
    s1_alt <= alt_sel;
    s2_p   <= s1_x * cfg.in_scale;                          // 27 fraction bits
    s2_alt <= s1_alt;
    s3_n   <= sat_sig(96'(s2_p) >>> (SIG_FRAC + K_FRAC - (SIG_W - 1)));   // 24 fraction bits
    s3_alt <= s2_alt;
  end

  // s4: address and fraction
  logic [AW-1:0] s3_addr;
  assign s3_addr = {~s3_n[SIG_W-1], s3_n[SIG_W-2 -: AW-1]};
  logic [AW-1:0] s4_addr;
  logic [FW-1:0] s4_frac;
  always_ff @(posedge clk) begin
    s4_addr <= s3_addr;
    s4_frac <= s3_n[FW-1:0];
    s4_alt  <= s3_alt;
  end

  // s5: read both banks
  logic          top_entry;
  assign top_entry = &s4_addr;
  always_comb begin
    rd_o = s4_addr[AW-1:1];
    if (s4_addr[0] && !top_entry) rd_e = s4_addr[AW-1:1] + 1'b1;
    else                          rd_e = s4_addr[AW-1:1];
  end
  lut_t          s5_e, s5_o;
  logic          s5_odd, s5_top;
  logic [FW-1:0] s5_frac;
  always_ff @(posedge clk) begin
    s5_e    <= bank_e[re_idx];
    s5_o    <= bank_o[ro_idx];
    s5_odd  <= s4_addr[0];
    s5_top  <= top_entry;
    s5_frac <= s4_frac;
  end

  // s6: order the pair; s7: slope times fraction; s8: add
  lut_t                    s6_a;
  logic signed [LUT_W:0]   s6_d;
  logic [FW-1:0]           s6_frac;
  logic signed [LUT_W+FW+1:0] s7_p;
  lut_t                    s7_a;
  logic signed [LUT_W+1:0] s8_f;
  always_ff @(posedge clk) begin
    if (s5_top)      begin s6_a <= s5_o; s6_d <= '0; end
    else if (s5_odd) begin s6_a <= s5_o; s6_d <= (LUT_W+1)'(s5_e) - (LUT_W+1)'(s5_o); end
    else             begin s6_a <= s5_e; s6_d <= (LUT_W+1)'(s5_o) - (LUT_W+1)'(s5_e); end
    s6_frac <= s5_frac;
    s7_p    <= s6_d * $signed({1'b0, s6_frac});
    s7_a    <= s6_a;
    s8_f    <= (LUT_W+2)'(s7_a) + (LUT_W+2)'(s7_p >>> FW);
  end

  // s9: output scaling; s10: back to the signal format
  logic signed [LUT_W+2+K_W-1:0] s9_p;
  sig_t                          s10_y;
  always_ff @(posedge clk) begin
    s9_p  <= s8_f * cfg.out_scale;                          // 24 fraction bits
    s10_y <= sat_sig(96'(s9_p) >>> (LUT_FRAC + K_FRAC - SIG_FRAC));
  end

  // bypass path and the last two stages
  sig_t byp [NLF_LAT-1];
  sig_t s11_y;
  always_ff @(posedge clk) begin
    byp[0] <= x;
    for (int i = 1; i < NLF_LAT - 1; i++) byp[i] <= byp[i-1];
    s11_y <= s10_y;
    y     <= cfg.bypass ? byp[NLF_LAT-2] : s11_y;
  end

endmodule
