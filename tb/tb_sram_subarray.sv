// tb_sram_subarray: random operations on the 64x64 array against a reference
// copy kept in the testbench. Every row is first written in full; then
// random masked writes and pseudo-reads (random precharge groups and flip
// bits) are applied, and after each one the touched row and a random other
// row are read back on `bl`. Checks that pseudo-read changes only
// precharged groups of the selected row, and only where the flip bit is 1.
`include "tb_util.svh"
module tb_sram_subarray;
  import mcmc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [63:0] wl;
  logic [15:0] pre;
  logic prd, wr_en;
  logic [63:0] flip, wr_mask, wr_data, bl;
  logic [63:0] refm [64];
  always #5 clk = ~clk;

  sram_subarray dut (.clk, .wl, .pre, .prd, .flip, .wr_en, .wr_mask, .wr_data, .bl);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] expand(logic [15:0] p);
    logic [63:0] r;
    for (int c = 0; c < 64; c++) r[c] = p[c/4];
    return r;
  endfunction

  task automatic read_row(int r);
    wl = 64'd1 << r; prd = 0; wr_en = 0;
    #1;
    `CHECK(bl == refm[r], ("row %0d read %h exp %h", r, bl, refm[r]))
  endtask

  initial begin
    int r, o;
    wl = 0; pre = 0; prd = 0; wr_en = 0; flip = 0; wr_mask = 0; wr_data = 0;
    @(negedge clk);
    for (r = 0; r < 64; r++) begin
      wl = 64'd1 << r; wr_en = 1; wr_mask = '1;
      wr_data = {$urandom, $urandom};
      refm[r] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (r = 0; r < 64; r++) read_row(r);
    for (int n = 0; n < 600; n++) begin
      r = $urandom_range(63);
      wl = 64'd1 << r;
      if ($urandom_range(1)) begin
        prd = 1; wr_en = 0;
        pre = 16'($urandom);
        flip = {$urandom, $urandom};
        wr_mask = {$urandom, $urandom};   // ignored during pseudo-read
        refm[r] = refm[r] ^ (flip & expand(pre));
      end else begin
        prd = 0; wr_en = 1;
        wr_mask = {$urandom, $urandom};
        wr_data = {$urandom, $urandom};
        refm[r] = (refm[r] & ~wr_mask) | (wr_data & wr_mask);
      end
      @(negedge clk);
      prd = 0; wr_en = 0;
      read_row(r);
      o = $urandom_range(63);
      read_row(o);
    end
    // no word line: nothing changes
    wl = 0; prd = 1; pre = '1; flip = '1;
    @(negedge clk);
    prd = 0;
    for (r = 0; r < 64; r++) read_row(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
