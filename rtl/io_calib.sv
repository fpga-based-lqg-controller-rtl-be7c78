// io_calib: offset and gain correction of one converter channel.
//
// ADC side (OFFSET_FIRST = 1): out = (in + offset) * gain.
// DAC side (OFFSET_FIRST = 0): out = in * gain + offset.
// in, offset and out are W-bit signed words in the same fixed-point format; gain is a GW-bit
// signed word with GFRAC fraction bits. The result saturates to W bits instead of wrapping.
//
// Timing: pipelined, one sample per clock, latency 4 clocks (input register, add or multiply,
// multiply or add, saturation). The two formulas come from the paper (the controller's
// calibration section, and the simulator's set_adc_calib / set_dac_calib calls); the 4-cycle
// latency is the simulator's delay-table figure and is used for the controller too; the word
// formats of offset and gain are this design's choice.
module io_calib #(
  parameter int unsigned W            = 14,
  parameter int unsigned GW           = 18,
  parameter int unsigned GFRAC        = 10,
  parameter bit          OFFSET_FIRST = 1'b1
) (
  input  logic                 clk,
  input  logic signed [W-1:0]  din,
  input  logic signed [W-1:0]  offset,
  input  logic signed [GW-1:0] gain,
  output logic signed [W-1:0]  dout
);
  localparam int unsigned PW = W + GW + 2;
  localparam logic signed [PW-1:0] MAXV = PW'((2 ** (W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(2 ** (W - 1));

  logic signed [W-1:0]  s1;
  logic signed [PW-1:0] s2, s3;
  always_ff @(posedge clk) begin
    s1 <= din;
    if (OFFSET_FIRST) begin
      s2 <= PW'(s1) + PW'(offset);
      s3 <= (s2 * PW'(gain)) >>> GFRAC;
    end else begin
      s2 <= (PW'(s1) * PW'(gain)) >>> GFRAC;
      s3 <= s2 + PW'(offset);
    end
    if (s3 > MAXV)      dout <= MAXV[W-1:0];
    else if (s3 < MINV) dout <= MINV[W-1:0];
    else                dout <= s3[W-1:0];
  end
endmodule
