// tb_hil_cfg_regs: self-checking test of the simulator configuration registers.
//
// Checks the reset values (all NLFs bypassed, gains and NLF scales 1.0, the rest zero, run off), then issues
// 4000 random writes to valid register addresses, table addresses and unused addresses.
// A reference copy of the configuration is updated by an independent decoder written with
// address ranges; after every write the whole configuration structure must equal the
// reference, so a write must change its own field and nothing else. Table writes must appear
// on `tw` one clock later with the decoded NLF index, table select, entry and value; the
// clear bit must give a single-clock pulse.
`timescale 1ns/1ps
module tb_hil_cfg_regs;
  import hil_pkg::*;
  logic clk = 0, rst, we, run, clear;
  logic [19:0] addr;
  logic [31:0] wdata;
  hil_cfg_t cfg, refc;
  tw_t tw;
  int checks = 0, failures = 0;
  always #2 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  hil_cfg_regs dut (.clk, .rst, .we, .addr, .wdata, .cfg, .tw, .run, .clear);

  function automatic void apply(ref hil_cfg_t c, input int a, input logic [31:0] d);
    kconst_t k = d[17:0];
    shift_t s = d[5:0];
    if (a == R_NLFSW_IOM) c.nlfsw_iomask = d[8:0];
    else if (a == R_NLFSW_SEL) c.nlfsw_sel = d[8:0];
    else if (a == R_NLF_BYP) begin for (int n = 0; n < N_NLF; n++) c.nlf[n].bypass = d[n]; end
    else if (a >= R_ADC_OFS && a < R_ADC_OFS + 2) c.adc_cal[a - R_ADC_OFS].offset = d[13:0];
    else if (a >= R_ADC_GAIN && a < R_ADC_GAIN + 2) c.adc_cal[a - R_ADC_GAIN].gain = k;
    else if (a >= R_DAC_OFS && a < R_DAC_OFS + 2) c.dac_cal[a - R_DAC_OFS].offset = d[13:0];
    else if (a >= R_DAC_GAIN && a < R_DAC_GAIN + 2) c.dac_cal[a - R_DAC_GAIN].gain = k;
    else if (a >= R_A && a < R_A + 6) c.a[(a - R_A) / 2][(a - R_A) % 2] = k;
    else if (a >= R_B && a < R_B + 3) c.b[a - R_B] = k;
    else if (a >= R_D && a < R_D + 6) c.d[(a - R_D) / 3][(a - R_D) % 3] = k;
    else if (a == R_OUTSEL) c.out_sel = d[5:0];
    else if (a >= R_SLICE && a < R_SLICE + 48 && (a - R_SLICE) % 16 < 9) begin
      int j = (a - R_SLICE) / 16;
      case ((a - R_SLICE) % 16)
        0: c.slice[j].u_factor = k;
        1: c.slice[j].x_factor = k;
        2: c.slice[j].xdot_factor = k;
        3: c.slice[j].kappa = k;
        4: c.slice[j].lambda = s;
        5: c.slice[j].kappa_qd = k;
        6: c.slice[j].lambda_qd = s;
        7: c.slice[j].kappa_q = k;
        default: c.slice[j].lambda_q = s;
      endcase
    end
    else if (a >= R_NLF_IN && a < R_NLF_IN + N_NLF) c.nlf[a - R_NLF_IN].in_scale = k;
    else if (a >= R_NLF_OUT && a < R_NLF_OUT + N_NLF) c.nlf[a - R_NLF_OUT].out_scale = k;
  endfunction

  initial begin
    int a, nclr = 0;
    logic [31:0] d;
    rst = 1; we = 0; addr = 0; wdata = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    refc = '0;
    for (int i = 0; i < 2; i++) begin refc.adc_cal[i].gain = 18'sd1024; refc.dac_cal[i].gain = 18'sd1024; end
    for (int n = 0; n < N_NLF; n++) begin
      refc.nlf[n].bypass = 1'b1; refc.nlf[n].in_scale = 18'sd1024; refc.nlf[n].out_scale = 18'sd1024;
    end
    checks++; if (cfg !== refc || run !== 0) begin failures++; $display("reset values"); end
    for (int it = 0; it < 4000; it++) begin
      int kind;
      kind = $urandom_range(0, 9);
      d = $urandom;
      @(negedge clk);
      we = 1;
      if (kind == 0) begin                       // table write
        addr = {1'b1, 3'b000, 5'($urandom_range(0, N_NLF - 1)), 1'($urandom), 10'($urandom)};
      end else if (kind == 1) begin              // control
        addr = 20'(R_CTRL);
      end else if (kind == 2) begin              // unused / aliased page: must not write
        addr = {1'b0, 11'($urandom_range(1, 2047)), 8'($urandom)};
      end else begin
        addr = 20'($urandom_range(0, 191));
      end
      wdata = d;
      a = int'(addr[7:0]);
      if (!addr[19] && addr[18:8] == 0) apply(refc, a, d);
      @(negedge clk);
      we = 0;
      checks++;
      if (cfg !== refc) begin failures++; if (failures < 6) $display("cfg mismatch after write %h", addr); end
      if (addr[19]) begin
        checks++;
        if (!(tw.en && tw.nlf == addr[15:11] && tw.alt == addr[10] && tw.addr == addr[9:0] && tw.data == d[15:0])) begin
          failures++; $display("tw mismatch");
        end
      end else begin
        checks++; if (tw.en) begin failures++; $display("spurious tw"); end
      end
      if (kind == 1) begin
        checks++;
        if (run !== d[0] || clear !== d[1]) begin failures++; $display("ctrl mismatch"); end
        nclr += int'(d[1]);
        @(negedge clk);
        checks++; if (clear) begin failures++; $display("clear longer than one clock"); end
      end
    end
    checks++; if (nclr == 0) begin failures++; $display("no clear pulse issued"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
