// tb_compartment: one compartment driven command by command against a
// reference array kept here. Covers host writes and reads (only when
// selected), pseudo-reads of 1 to 8 groups with given flip bits, in-memory
// copies between random groups of a row, write-back of the held chain value,
// the candidate read into the calculation circuit, an accept/reject check,
// and the rule that a restore (only_rej) leaves an accepting compartment
// untouched and acts in a rejecting one.
`include "tb_util.svh"
module tb_compartment;
  import mcmc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  macro_op_t op;
  logic csel;
  logic [3:0] host_wdata, sa_out;
  logic [63:0] flip;
  logic [7:0] u, idx_cur, idx_new;
  logic [15:0] p_cur, p_new;
  logic [31:0] x_cur, x_new;
  logic accept, err;
  logic [63:0] refm [64];
  always #5 clk = ~clk;

  compartment dut (.clk, .rst_n, .op, .csel, .host_wdata, .flip, .u, .p_cur, .p_new,
                   .idx_cur, .idx_new, .sa_out, .x_cur, .x_new, .accept, .err);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    op = '0; op.mode = MODE_OFF; csel = 1;
  endtask

  task automatic host_write(int r, int g, logic [3:0] d, bit sel);
    @(negedge clk);
    idle(); op.mode = MODE_MEMORY; op.row = 6'(r); op.grp = 4'(g); op.we = 1;
    host_wdata = d; csel = sel;
    if (sel) refm[r][4*g +: 4] = d;
    @(negedge clk); idle();
  endtask

  task automatic host_read_check(int r, int g);
    @(negedge clk);
    idle(); op.mode = MODE_MEMORY; op.row = 6'(r); op.grp = 4'(g);
    @(negedge clk); idle();
    `CHECK(sa_out == refm[r][4*g +: 4], ("read r%0d g%0d %h exp %h", r, g, sa_out, refm[r][4*g +: 4]))
  endtask

  task automatic check_row(int r);
    for (int g = 0; g < 16; g++) host_read_check(r, g);
  endtask

  task automatic copy(int r, int s, int d, bit only_rej);
    @(negedge clk);
    idle(); op.mode = MODE_COPY; op.row = 6'(r); op.src_grp = 4'(s); op.grp = 4'(d); op.only_rej = only_rej;
    #1 `CHECK(!err, ("copy err"))
    if (!(only_rej && accept)) refm[r][4*d +: 4] = refm[r][4*s +: 4];
    @(negedge clk);  // held two cycles as the controller does
    @(negedge clk); idle();
  endtask

  task automatic decide(bit acc);
    // read group 0 of row 0 as candidate, then check with u/p chosen to give acc
    @(negedge clk);
    idle(); op.mode = MODE_MEMORY; op.row = 0; op.grp = 0; op.ld_new = 1; op.nib = 0; op.prec = PREC_4;
    @(negedge clk); idle();
    `CHECK(x_new == 32'(refm[0][3:0]), ("candidate %h", x_new))
    u = acc ? 8'd0 : 8'd255; p_cur = 16'd100; p_new = acc ? 16'd1 : 16'd0;
    op.calc = 1;
    @(negedge clk); idle();
    `CHECK(accept == acc, ("accept %b exp %b", accept, acc))
  endtask

  initial begin
    int r, g, s, d, p, gs;
    logic [63:0] gm;
    idle(); host_wdata = 0; flip = 0; u = 0; p_cur = 0; p_new = 0;
    #12 rst_n = 1;
    for (r = 0; r < 64; r++) for (g = 0; g < 16; g++) host_write(r, g, 4'($urandom), 1);
    for (r = 0; r < 64; r += 9) check_row(r);
    // unselected writes do nothing
    host_write(5, 3, ~refm[5][15:12], 0);
    host_read_check(5, 3);
    // pseudo-reads
    for (int n = 0; n < 40; n++) begin
      r = $urandom_range(63); p = $urandom_range(3); gs = 1 << p;
      g = gs * $urandom_range(16 / gs - 1);
      flip = {$urandom, $urandom};
      gm = '0;
      for (int k = 0; k < 4*gs; k++) gm[4*g + k] = 1'b1;
      @(negedge clk);
      idle(); op.mode = MODE_RNG; op.row = 6'(r); op.grp = 4'(g); op.prec = prec_e'(p);
      refm[r] = refm[r] ^ (flip & gm);
      @(negedge clk); idle();
      check_row(r);
      check_row((r + 1) % 64);
    end
    // copies
    for (int n = 0; n < 40; n++) begin
      r = $urandom_range(63); s = $urandom_range(15);
      d = (s + 1 + $urandom_range(14)) % 16;
      copy(r, s, d, 0);
      check_row(r);
    end
    // restore only where rejected
    decide(1);
    copy(7, 1, 2, 1);      // accepted: nothing happens
    check_row(7);
    decide(0);
    copy(7, 4, 5, 1);      // rejected: copy happens
    check_row(7);
    // write-back of the held value: load x_cur via ld_init, write nibble 0
    @(negedge clk);
    idle(); op.mode = MODE_MEMORY; op.row = 9; op.grp = 6; op.ld_init = 1; op.nib = 0;
    @(negedge clk); idle();
    `CHECK(x_cur[3:0] == refm[9][27:24], ("x_cur %h", x_cur))
    @(negedge clk);
    idle(); op.mode = MODE_MEMORY; op.we = 1; op.wsel_cur = 1; op.row = 10; op.grp = 0; op.nib = 0;
    host_wdata = ~refm[9][27:24];
    refm[10][3:0] = refm[9][27:24];
    @(negedge clk); idle();
    check_row(10);
    // malformed copy is flagged
    @(negedge clk);
    idle(); op.mode = MODE_COPY; op.src_grp = 3; op.grp = 3;
    #1 `CHECK(err, ("copy onto itself not flagged"))
    op.mode = MODE_OFF;
    @(negedge clk); idle();
    for (r = 0; r < 64; r++) check_row(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
