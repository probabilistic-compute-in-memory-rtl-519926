// tb_bitcell_flip_model: checks the pseudo-read noise model. After reset the
// flip vector is zero; with `en` low it holds; with `en` high, over 2000
// vectors of 64 bits, the fraction of ones must be within 1% of the 45%
// bit-flip rate (the standard error of that estimate is 0.14%), and no
// column may be stuck.
`include "tb_util.svh"
module tb_bitcell_flip_model;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [63:0] flip;
  always #5 clk = ~clk;

  bitcell_flip_model #(.N(64), .BFR_PER_MILLE(450), .SEED(7)) dut (.clk, .rst_n, .en, .flip);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    int col_ones [64];
    logic [63:0] held;
    ones = 0;
    foreach (col_ones[i]) col_ones[i] = 0;
    repeat (2) @(posedge clk);
    `CHECK(flip == '0, ("flip not zero in reset: %h", flip))
    rst_n = 1;
    en = 1;
    @(posedge clk); #1;
    en = 0;
    held = flip;
    repeat (5) @(posedge clk);
    #1 `CHECK(flip == held, ("flip changed with en low"))
    en = 1;
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk); #1;
      ones += $countones(flip);
      for (int i = 0; i < 64; i++) col_ones[i] += int'(flip[i]);
    end
    `CHECK(ones > 2000*64*44/100 && ones < 2000*64*46/100, ("flip rate %0d / %0d", ones, 2000*64))
    for (int i = 0; i < 64; i++)
      `CHECK(col_ones[i] > 700 && col_ones[i] < 1100, ("column %0d flip count %0d", i, col_ones[i]))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
