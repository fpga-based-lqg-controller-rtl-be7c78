// lqg_recorder: frame recorder of the LQG controller.
//
// After `arm`, every `decim`-th controller sample (decim = 0 counts as 1) all N_CH channels
// are latched together as one frame: the two detection inputs chi, the two feedback outputs
// u and the seven estimated states, each sign-extended to 32 bits. The channels enabled in
// ch_mask are then sent out in ascending channel order on a valid/ready word stream, the
// last word of a frame flagged with m_last, towards the memory writer. Recording stops after
// n_frames frames. A frame that falls due while the previous one is still being sent is
// dropped and counted in `overruns`.
//
// Timing: the frame is latched in the clock in which `tick` (one per controller sample) is
// high; the first word is offered on the next clock; one word per clock while m_ready is
// high. Latching all channels at one instant, the user-set multiple of the 64 ns sample
// time, the frame count and the channel selection are the paper's; the stream interface,
// word size and overrun handling are this design's choices.
module lqg_recorder #(
  parameter int unsigned N_CH = lqg_pkg::N_CH
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     arm,
  input  logic [15:0]              decim,
  input  logic [31:0]              n_frames,
  input  logic [N_CH-1:0]          ch_mask,
  input  logic                     tick,
  input  logic signed [N_CH-1:0][31:0] ch,
  output logic                     m_valid,
  output logic [31:0]              m_data,
  output logic                     m_last,
  input  logic                     m_ready,
  output logic                     recording,
  output logic [31:0]              frames_done,
  output logic [15:0]              overruns
);
  logic [N_CH-1:0][31:0] frame;
  logic [N_CH-1:0]       left;         // channels of the current frame not yet sent
  logic [15:0]           dcnt;
  logic                  due;
  logic [$clog2(N_CH)-1:0] cur;

  always_comb begin
    cur = '0;
    for (int c = N_CH - 1; c >= 0; c--) if (left[c]) cur = ($clog2(N_CH))'(c);
  end
  assign m_valid = |left;
  assign m_data  = frame[cur];
  assign m_last  = m_valid && ((left & ~(N_CH'(1) << cur)) == '0);
  assign due     = recording && tick && (dcnt == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      recording <= 1'b0; frames_done <= '0; overruns <= '0; dcnt <= '0;
      left <= '0; frame <= '0;
    end else begin
      if (m_valid && m_ready) left[cur] <= 1'b0;
      if (arm) begin
        recording <= (n_frames != 0);
        frames_done <= '0; overruns <= '0; dcnt <= '0;
      end else if (recording && tick) begin
        dcnt <= (dcnt + 16'd1 >= decim) ? 16'd0 : dcnt + 16'd1;
        if (due) begin
          if (m_valid && !(m_last && m_ready)) begin
            overruns <= overruns + 16'd1;
          end else begin
            frame       <= ch;
            left        <= ch_mask;
            frames_done <= frames_done + 32'd1;
            if (frames_done + 32'd1 >= n_frames) recording <= 1'b0;
          end
        end
      end
    end
  end
endmodule
