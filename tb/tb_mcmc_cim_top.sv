// tb_mcmc_cim_top: reduced-size end-to-end test: 4 compartments instead of 64, every other parameter at its default. Runs all four precisions, address ranges that cross row boundaries and end at the last slot, a rejected configuration and random memory-mode accesses.
// The checks themselves are in mcmc_top_checks.svh.
`include "tb_util.svh"
module tb_mcmc_cim_top;
  import mcmc_pkg::*;
  localparam int NC = 4;
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

  mcmc_cim_top #(.N_COMP(NC), .SEED(11)) dut (
    .clk, .rst_n, .start, .prec, .a_start, .a_end, .busy, .done, .cfg_err,
    .mem_en, .mem_we, .mem_comp, .mem_row, .mem_grp, .mem_wdata, .mem_rdata,
    .pdf_we, .pdf_addr, .pdf_wdata,
    .obs_calc, .obs_u, .obs_accept, .obs_x_new, .obs_x_cur,
    .cnt_calc, .cnt_accept, .cnt_reject, .cnt_random, .cnt_rest_copy, .cnt_rest_write,
    .cnt_fwd_copy, .cnt_fwd_write, .err
  );

`include "mcmc_top_checks.svh"

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init_tb();
    mem_test(200);
    cfg_err_test();
    program_pdf(0);
    run(0, 0, 40);
    program_pdf(1);
    run(1, 5, 30);
    run(2, 2, 12);
    run(3, 0, 9);
    program_pdf(0);
    run(0, 1000, 1023);
    final_report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
