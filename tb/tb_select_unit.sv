// tb_select_unit: all combinations of the group's cells, A, B and a random
// bus: BFA carries (BL_k, BLB_k) pairs only with A, write data is the BL
// lines of BFB, write enable is B, and a non-complementary incoming pair is
// flagged only with B.
`include "tb_util.svh"
module tb_select_unit;
  int checks = 0, failures = 0;
  logic [3:0] bl, wr_data;
  logic a, b, wr_en, bad_pair;
  logic [7:0] bfb, bfa;

  select_unit dut (.bl, .a, .b, .bfb, .bfa, .wr_en, .wr_data, .bad_pair);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e_bfa;
    logic [3:0] e_wd;
    logic e_bad;
    for (int v = 0; v < 16; v++) for (int ab = 0; ab < 4; ab++) for (int n = 0; n < 8; n++) begin
      bl = 4'(v); a = ab[0]; b = ab[1];
      if (n < 4) begin
        e_wd = 4'($urandom);
        bfb = {~e_wd[3], e_wd[3], ~e_wd[2], e_wd[2], ~e_wd[1], e_wd[1], ~e_wd[0], e_wd[0]};
      end else bfb = 8'($urandom);
      e_bfa = '0;
      if (a) e_bfa = {~bl[3], bl[3], ~bl[2], bl[2], ~bl[1], bl[1], ~bl[0], bl[0]};
      e_wd  = {bfb[6], bfb[4], bfb[2], bfb[0]};
      e_bad = b && ((bfb[0] == bfb[1]) || (bfb[2] == bfb[3]) || (bfb[4] == bfb[5]) || (bfb[6] == bfb[7]));
      #1;
      `CHECK(bfa == e_bfa, ("bfa %h exp %h", bfa, e_bfa))
      `CHECK(wr_en == b, ("wr_en"))
      `CHECK(wr_data == e_wd, ("wr_data %h exp %h", wr_data, e_wd))
      `CHECK(bad_pair == e_bad, ("bad_pair %b exp %b bfb %h", bad_pair, e_bad, bfb))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
