// tb_rw_circuit: random rows and groups. Read data is the selected group;
// sa_out latches it only on `re` and otherwise keeps its value; a write puts
// the data and a 4-bit mask on the selected group only.
`include "tb_util.svh"
module tb_rw_circuit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [63:0] bl, wr_mask, wr_data;
  logic [3:0] grp, wdata, rd_data, sa_out;
  logic re, we;
  always #5 clk = ~clk;

  rw_circuit dut (.clk, .rst_n, .bl, .grp, .re, .we, .wdata, .rd_data, .sa_out, .wr_mask, .wr_data);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] last;
    re = 0; we = 0; bl = 0; grp = 0; wdata = 0;
    #12 rst_n = 1;
    last = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      bl = {$urandom, $urandom}; grp = 4'($urandom); wdata = 4'($urandom);
      re = 1'($urandom); we = 1'($urandom);
      #1;
      `CHECK(rd_data == bl[4*grp +: 4], ("rd_data"))
      `CHECK(wr_mask == (we ? (64'hf << (4*grp)) : 64'd0), ("wr_mask %h", wr_mask))
      `CHECK(!we || wr_data[4*grp +: 4] == wdata, ("wr_data"))
      if (re) last = bl[4*grp +: 4];
      @(posedge clk); #1;
      `CHECK(sa_out == last, ("sa_out %h exp %h", sa_out, last))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
