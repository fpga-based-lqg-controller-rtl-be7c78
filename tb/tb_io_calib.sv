// tb_io_calib: drives random samples through both calibration variants (ADC: (x+o)*g,
// DAC: x*g+o) with random offsets and gains, and compares every output with the value
// expected from the input applied exactly 4 clocks earlier, including saturation.
module tb_io_calib;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [13:0] din, ofs, ya, yd;
  logic signed [17:0] gain;
  int checks = 0, failures = 0, sat_hits = 0;

  io_calib #(.W(14), .GW(18), .GFRAC(10), .OFFSET_FIRST(1'b1)) dut_a (
    .clk, .din, .offset(ofs), .gain, .dout(ya));
  io_calib #(.W(14), .GW(18), .GFRAC(10), .OFFSET_FIRST(1'b0)) dut_d (
    .clk, .din, .offset(ofs), .gain, .dout(yd));

  function automatic int sat14(longint v);
    if (v > 8191) return 8191;
    if (v < -8192) return -8192;
    return int'(v);
  endfunction
  function automatic longint fdiv(longint v, int sh);   // floor(v / 2**sh)
    longint q;
    q = v / (64'sd1 <<< sh);
    if (v < 0 && q * (64'sd1 <<< sh) != v) q = q - 1;
    return q;
  endfunction

  int hist_in [$];
  initial begin
    din = 0; ofs = 0; gain = 18'sd1024;
    for (int t = 0; t < 2000; t++) begin
      if (t % 100 == 0) begin
        ofs  = 14'($urandom_range(0, 2000)) - 14'sd1000;
        gain = (t % 300 == 0) ? 18'sd4000 : 18'($urandom_range(512, 1536));
      end
      din = 14'($urandom);
      @(posedge clk);
      hist_in.push_back(int'(din));
      #1;
      if (hist_in.size() >= 4) begin
        int x;
        int ea, ed;
        x = hist_in[hist_in.size() - 4];
        ea = sat14(fdiv((longint'(x) + longint'(ofs)) * longint'(gain), 10));
        ed = sat14(fdiv(longint'(x) * longint'(gain), 10) + longint'(ofs));
        if (ea == 8191 || ea == -8192) sat_hits++;
        // offset and gain are held for 100 clocks; skip the clocks right after a change
        if (t % 100 >= 5) begin
          checks += 2;
          if (int'(ya) != ea) begin failures++; if (failures < 5) $display("ADC t=%0d got %0d exp %0d", t, ya, ea); end
          if (int'(yd) != ed) begin failures++; if (failures < 5) $display("DAC t=%0d got %0d exp %0d", t, yd, ed); end
        end
      end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
