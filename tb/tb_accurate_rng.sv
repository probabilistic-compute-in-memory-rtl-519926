// tb_accurate_rng: timing and value of the accurate [0,1] RNG. After `start`
// in cycle t, u_valid must be low in t+1 and high from t+2, and u must equal
// the XOR fold (bit j = XOR of bit j of the 8 groups) of the flip bits
// present during the pseudo-read cycle t+1, whatever the cells held before.
// Statistics over 4000 numbers made from 45% flip bits: every bit of u is
// 1 with probability within 0.5 +- 0.03 and the mean is 127.5 +- 4.
`include "tb_util.svh"
module tb_accurate_rng;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, u_valid;
  logic [63:0] flip;
  logic [7:0] u;
  always #5 clk = ~clk;

  accurate_rng dut (.clk, .rst_n, .start, .flip, .u, .u_valid);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e;
    logic [63:0] f;
    int ones [8];
    longint sum;
    foreach (ones[j]) ones[j] = 0;
    sum = 0;
    flip = '0;
    #12 rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      start = 1; flip = {$urandom, $urandom};    // flips in the reset cycle must not matter
      @(negedge clk);
      start = 0;
      for (int i = 0; i < 64; i++) f[i] = ($urandom_range(999) < 450);
      flip = f;
      `CHECK(!u_valid, ("u_valid early"))
      @(negedge clk);
      flip = {$urandom, $urandom};               // later flips must not matter
      e = '0;
      for (int g = 0; g < 8; g++) e ^= f[8*g +: 8];
      `CHECK(u_valid, ("u_valid missing two cycles after start"))
      `CHECK(u == e, ("u %h exp %h", u, e))
      @(negedge clk);
      `CHECK(u_valid && u == e, ("u not held"))
      sum += longint'(u);
      for (int j = 0; j < 8; j++) ones[j] += int'(u[j]);
    end
    for (int j = 0; j < 8; j++)
      `CHECK(ones[j] > 1880 && ones[j] < 2120, ("bit %0d ones %0d of 4000", j, ones[j]))
    `CHECK(sum > 4000*1235/10 && sum < 4000*1315/10, ("mean %0d/4000", sum))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
