// tb_bl_conditioning: exhaustive check of the precharge enables for every
// mode, precision and first group. RNG mode: groups first..first+G-1 only
// (G = 1, 2, 4, 8); memory mode: all; copy and off: none.
`include "tb_util.svh"
module tb_bl_conditioning;
  import mcmc_pkg::*;
  int checks = 0, failures = 0;
  macro_mode_e mode;
  prec_e prec;
  logic [3:0] first_grp;
  logic [15:0] pre;

  bl_conditioning dut (.mode, .prec, .first_grp, .pre);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] exp_pre;
    int gsz;
    for (int m = 0; m < 4; m++) begin
      for (int p = 0; p < 4; p++) begin
        for (int f = 0; f < 16; f++) begin
          mode = macro_mode_e'(m); prec = prec_e'(p); first_grp = 4'(f);
          gsz = (p == 0) ? 1 : (p == 1) ? 2 : (p == 2) ? 4 : 8;
          exp_pre = '0;
          if (m == 1) exp_pre = 16'hffff;
          if (m == 2) for (int g = f; g < f + gsz && g < 16; g++) exp_pre[g] = 1'b1;
          #1;
          `CHECK(pre == exp_pre, ("mode %0d prec %0d first %0d: pre %h exp %h", m, p, f, pre, exp_pre))
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
