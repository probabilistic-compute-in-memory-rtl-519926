// tb_copy_unit: for random rows and every source/destination group pair,
// the destination group's write mask is set and its write data equals the
// source group's four cells; no other group is written; `err` is low. Then
// malformed controls (no source, two sources, source = destination) must
// raise `err`, and no controls must write nothing.
`include "tb_util.svh"
module tb_copy_unit;
  int checks = 0, failures = 0;
  logic [63:0] bl, wr_mask, wr_data;
  logic [15:0] a, b;
  logic err;

  copy_unit dut (.bl, .a, .b, .wr_mask, .wr_data, .err);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] e_mask;
    for (int n = 0; n < 4; n++) begin
      bl = {$urandom, $urandom};
      for (int s = 0; s < 16; s++) for (int d = 0; d < 16; d++) begin
        if (s == d) continue;
        a = 16'd1 << s; b = 16'd1 << d;
        e_mask = 64'hf << (4*d);
        #1;
        `CHECK(wr_mask == e_mask, ("%0d->%0d mask %h", s, d, wr_mask))
        `CHECK(wr_data[4*d +: 4] == bl[4*s +: 4], ("%0d->%0d data %h exp %h", s, d, wr_data[4*d +: 4], bl[4*s +: 4]))
        `CHECK(!err, ("%0d->%0d err", s, d))
      end
    end
    a = 0; b = 16'h0010; #1; `CHECK(err, ("no source not flagged"))
    a = 16'h0003; b = 16'h0010; #1; `CHECK(err, ("two sources not flagged"))
    a = 16'h0010; b = 16'h0010; #1; `CHECK(err, ("same group not flagged"))
    a = 0; b = 0; #1; `CHECK(!err && wr_mask == 0, ("idle writes"))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
