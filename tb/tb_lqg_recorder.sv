// tb_lqg_recorder: self-checking test of the frame recorder.
//
// A tick comes every 8 clocks, as the controller's sample strobe; channel c carries
// 16 * (tick number) + c, so every recorded word tells which sample and channel it came from.
// For several runs (decimation, frame count, channel mask and sink back-pressure chosen at
// random, including a sink so slow that frames must be dropped) the test collects the word
// stream and checks: all words of a frame come from one tick; channels appear in ascending
// order and exactly as in the mask; m_last marks the last word; the number of frames equals
// n_frames and frames_done; recording ends; successive frames are decim * (1 + dropped)
// ticks apart, and the total number of dropped frames equals the overrun counter.
`timescale 1ns/1ps
module tb_lqg_recorder;
  import lqg_pkg::*;
  logic clk = 0, rst, arm, tick, m_valid, m_last, m_ready, recording;
  logic [15:0] decim, overruns;
  logic [31:0] n_frames, frames_done, m_data;
  logic [N_CH-1:0] ch_mask;
  logic signed [N_CH-1:0][31:0] ch;
  int checks = 0, failures = 0;
  always #4 clk = ~clk;
  initial begin #50000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  lqg_recorder #(.N_CH(N_CH)) dut (.clk, .rst, .arm, .decim, .n_frames, .ch_mask, .tick, .ch,
                                   .m_valid, .m_data, .m_last, .m_ready, .recording,
                                   .frames_done, .overruns);

  task automatic run(int dec, int nf, logic [N_CH-1:0] mask, int ready_pct);
    int tk, cyc, nfr, cur_tick, prev_tick, gaps, nword, lastc;
    logic [N_CH-1:0] seen;
    bit open;
    tk = 0; nfr = 0; prev_tick = -1; gaps = 0; open = 0; seen = '0; lastc = -1; nword = 0;
    @(negedge clk);
    decim = 16'(dec); n_frames = 32'(nf); ch_mask = mask; arm = 1;
    @(negedge clk);
    arm = 0;
    for (cyc = 0; cyc < 200000 && (recording || m_valid); cyc++) begin
      tick = (cyc % 8 == 0);
      if (tick) tk++;
      for (int c = 0; c < N_CH; c++) ch[c] = 32'(tk * 16 + c);
      m_ready = ($urandom_range(0, 99) < ready_pct);
      #1;
      if (m_valid && m_ready) begin
        int wt, wc;
        wt = int'(m_data) / 16; wc = int'(m_data) % 16;
        nword++;
        if (!open) begin
          open = 1; cur_tick = wt; seen = '0; lastc = -1;
        end
        checks++;
        if (wt != cur_tick || wc <= lastc || !mask[wc]) begin
          failures++;
          if (failures < 6) $display("bad word %0d (tick %0d ch %0d)", m_data, wt, wc);
        end
        seen[wc] = 1'b1; lastc = wc;
        if (m_last) begin
          open = 0; nfr++;
          checks++;
          if (seen != mask) begin failures++; $display("frame misses channels"); end
          if (prev_tick >= 0) begin
            checks++;
            if ((cur_tick - prev_tick) % (dec == 0 ? 1 : dec) != 0) begin failures++; $display("frame spacing"); end
            gaps += (cur_tick - prev_tick) / (dec == 0 ? 1 : dec) - 1;
          end
          prev_tick = cur_tick;
        end
      end
      @(negedge clk);
    end
    if (mask == '0) nfr = int'(frames_done);   // empty frames produce no words
    $display("decim %0d frames %0d mask %h ready %0d%%: got %0d frames, %0d dropped, overruns %0d",
             dec, nf, mask, ready_pct, nfr, gaps, overruns);
    checks++; if (nfr != nf || int'(frames_done) != nf) begin failures++; $display("frame count"); end
    checks++; if (recording) begin failures++; $display("still recording"); end
    if (mask != '0) begin
      checks++; if (gaps != int'(overruns)) begin failures++; $display("overrun count"); end
    end
  endtask

  initial begin
    rst = 1; arm = 0; tick = 0; m_ready = 0; decim = 1; n_frames = 0; ch_mask = '0; ch = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(1, 50, 11'h7FF, 100);          // 11 words per 8 clocks: frames must be dropped
    run(2, 40, 11'h7FF, 100);
    run(1, 60, 11'h00F, 100);          // 4 channels fit in one sample time
    run(3, 30, 11'h555, 60);
    run(0, 20, 11'h401, 30);
    run(5, 25, 11'h7FF, 20);
    for (int r = 0; r < 10; r++)
      run($urandom_range(1, 6), $urandom_range(1, 40), 11'($urandom_range(1, 2047)), $urandom_range(10, 100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
