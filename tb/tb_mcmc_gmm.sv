// tb_mcmc_gmm: distribution test of the full-size macro (every parameter at
// its default) on the one-dimensional mixture of four Gaussians used as the
// sampler's GMM benchmark (means -2, 0, 3, 2.5, standard deviations 1, 1, 5,
// 3, x in [-10, 10]; equal weights, as the weights are not given). The
// mixture is programmed into the density table, every compartment
// runs an independent chain over the whole array, and the stored samples
// are compared with the target: total variation distance over 16 bins,
// after discarding the first 32 samples of each chain as burn-in. This is
// done for 4-bit samples (64 chains of 1024), 8-bit samples (64 chains of
// 512), 16-bit (64 x 256) and 32-bit samples (64 x 128). Every chain is also
// checked sample by sample against the accept rule, as in the end-to-end
// tests (mcmc_top_checks.svh). The burn-in length and the limits are this
// testbench's choice; the limits allow for the sampling noise of the
// number of samples each run produces.
`include "tb_util.svh"
module tb_mcmc_gmm;
  import mcmc_pkg::*;
  localparam int NC = 64;
  logic clk = 0, rst_n;
  logic start, busy, done, cfg_err;
  prec_e prec;
  logic [9:0] a_start, a_end;
  logic mem_en, mem_we;
  logic [$clog2(NC)-1:0] mem_comp;
  logic [5:0] mem_row;
  logic [3:0] mem_grp, mem_wdata, mem_rdata;
  logic pdf_we;
  logic [7:0] pdf_addr;
  logic [15:0] pdf_wdata;
  logic obs_calc;
  logic [7:0] obs_u;
  logic [NC-1:0] obs_accept;
  logic [31:0] obs_x_new [NC];
  logic [31:0] obs_x_cur [NC];
  logic [31:0] cnt_calc, cnt_accept, cnt_reject, cnt_random, cnt_rest_copy, cnt_rest_write, cnt_fwd_copy, cnt_fwd_write;
  logic err;
  always #5 clk = ~clk;

  mcmc_cim_top dut (
    .clk, .rst_n, .start, .prec, .a_start, .a_end, .busy, .done, .cfg_err,
    .mem_en, .mem_we, .mem_comp, .mem_row, .mem_grp, .mem_wdata, .mem_rdata,
    .pdf_we, .pdf_addr, .pdf_wdata,
    .obs_calc, .obs_u, .obs_accept, .obs_x_new, .obs_x_cur,
    .cnt_calc, .cnt_accept, .cnt_reject, .cnt_random, .cnt_rest_copy, .cnt_rest_write,
    .cnt_fwd_copy, .cnt_fwd_write, .err
  );

`include "mcmc_top_checks.svh"

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init_tb();
    program_pdf_gmm(0);
    run(0, 0, 1023);
    dist_check(0, 0.06);
    program_pdf_gmm(1);
    run(1, 0, 511);
    dist_check(1, 0.08);
    run(2, 0, 255);
    dist_check(2, 0.10);
    run(3, 0, 127);
    dist_check(3, 0.12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
