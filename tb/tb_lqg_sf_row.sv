// tb_lqg_sf_row: checks the shift-float row product against a real-valued sum of
// a_k * x_k * 2**-s_k for random residues, operands and exponents. Each product is truncated
// once in the block, so the integer result may sit below the exact value by at most one
// LSB per term.
module tb_lqg_sf_row;
  localparam int N = 11;
  logic signed [N-1:0][17:0] a;
  logic        [N-1:0][4:0]  s;
  logic signed [N-1:0][24:0] x;
  logic signed [47:0]        sum;
  int checks = 0, failures = 0;

  lqg_sf_row #(.N(N), .CW(18), .SW(5), .XW(25), .SUMW(48)) dut (.a, .s, .x, .sum);

  initial begin
    for (int t = 0; t < 400; t++) begin
      real refv;
      refv = 0.0;
      for (int k = 0; k < N; k++) begin
        a[k] = 18'($urandom);
        x[k] = 25'($urandom);
        s[k] = 5'($urandom_range(0, (t < 200) ? 31 : 4));
        refv  = refv + real'($signed(a[k])) * real'($signed(x[k])) / (2.0 ** s[k]);
      end
      #1;
      checks++;
      if (real'(sum) > refv + 0.001 || real'(sum) < refv - real'(N)) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d sum=%0d refv=%f", t, sum, refv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
