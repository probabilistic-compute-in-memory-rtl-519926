// tb_mcmc_mgd: distribution test of the full-size macro (every parameter at
// its default) on a bivariate Gaussian, a coarse form of the sampler's MGD
// benchmark. The 8-bit density index of a sample is read as two 4-bit
// coordinates x (upper half) and y (lower half), each spanning [-5, 5]; the
// table holds a zero-mean Gaussian with identity covariance on that 16 x 16
// grid (the benchmark's covariance is not given, so this is the test's own
// choice). Every compartment runs an independent chain over the whole array
// with 8-bit and with 32-bit samples; after 32 samples of burn-in per chain
// the samples are binned on a 4 x 4 grid of (x, y) and compared with the
// target by total variation distance. Every chain is also checked sample by
// sample against the accept rule (mcmc_top_checks.svh). The burn-in and the
// limits are the test's choice.
`include "tb_util.svh"
module tb_mcmc_mgd;
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
    bin_mode = 1;
    program_pdf_mgd();
    run(1, 0, 511);
    dist_check(1, 0.08);
    run(3, 0, 127);
    dist_check(3, 0.12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
