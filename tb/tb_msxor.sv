// tb_msxor: the 3-stage tree over 8 groups of 8 bits must give, for every
// output bit j, the XOR of bit j of all eight groups (what three stages of
// pairwise XOR reduce to). Checked on random words. Then a statistical
// check: raw bits that are 1 with probability 0.40 must give output bits
// that are 1 with probability within 0.5 +- 0.012 (the theory gives
// 0.49999872), while the raw bits stay near 0.40.
`include "tb_util.svh"
module tb_msxor;
  int checks = 0, failures = 0;
  logic [63:0] raw;
  logic [7:0] r_out;

  msxor #(.N_GROUPS(8), .GROUP_BITS(8), .STAGES(3)) dut (.raw, .r_out);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e;
    int ones_out [8];
    int ones_raw;
    for (int n = 0; n < 2000; n++) begin
      raw = {$urandom, $urandom};
      e = '0;
      for (int g = 0; g < 8; g++) e ^= raw[8*g +: 8];
      #1;
      `CHECK(r_out == e, ("raw %h out %h exp %h", raw, r_out, e))
    end
    foreach (ones_out[j]) ones_out[j] = 0;
    ones_raw = 0;
    for (int n = 0; n < 20000; n++) begin
      for (int i = 0; i < 64; i++) raw[i] = ($urandom_range(999) < 400);
      #1;
      ones_raw += $countones(raw);
      for (int j = 0; j < 8; j++) ones_out[j] += int'(r_out[j]);
    end
    `CHECK(ones_raw > 20000*64*39/100 && ones_raw < 20000*64*41/100, ("raw rate %0d", ones_raw))
    for (int j = 0; j < 8; j++)
      `CHECK(ones_out[j] > 9760 && ones_out[j] < 10240, ("bit %0d ones %0d of 20000", j, ones_out[j]))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
