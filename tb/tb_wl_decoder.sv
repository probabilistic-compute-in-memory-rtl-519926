// tb_wl_decoder: exhaustive check of the word-line decoder: for every row
// address with enable high exactly that word line is high; with enable low
// all are low.
`include "tb_util.svh"
module tb_wl_decoder;
  int checks = 0, failures = 0;
  logic [5:0] row;
  logic en;
  logic [63:0] wl;

  wl_decoder #(.ROWS(64)) dut (.row, .en, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int r = 0; r < 64; r++) begin
        row = 6'(r); en = e[0];
        #1;
        `CHECK(wl == (e ? (64'd1 << r) : 64'd0), ("row %0d en %0d wl %h", r, e, wl))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
