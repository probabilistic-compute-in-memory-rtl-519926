// tb_calc_circuit: random candidates, u and weights, all four precisions.
// The candidate is loaded nibble by nibble; its table index must be its top
// bits; on `calc` the decision must equal u*p(x_i) < 256*p(x*) computed here
// in 64-bit arithmetic, and x_cur must move to x* exactly on accept. Edge
// cases: u = 0 with p(x*) > 0 accepts; p(x*) = 0 rejects; u = 255 with
// equal weights accepts.
`include "tb_util.svh"
module tb_calc_circuit;
  import mcmc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  prec_e prec;
  logic ld_new = 0, ld_init = 0, calc = 0, accept;
  logic [2:0] nib;
  logic [3:0] rd_data, cur_nibble;
  logic [7:0] u, idx_cur, idx_new;
  logic [15:0] p_cur, p_new;
  logic [31:0] x_cur, x_new;
  always #5 clk = ~clk;

  calc_circuit dut (.clk, .rst_n, .prec, .ld_new, .ld_init, .nib, .rd_data, .calc, .u,
                    .p_cur, .p_new, .idx_cur, .idx_new, .x_cur, .x_new, .accept, .cur_nibble);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] top_bits(logic [31:0] x, int p);
    case (p)
      0: return {4'd0, x[3:0]};
      1: return x[7:0];
      2: return x[15:8];
      default: return x[31:24];
    endcase
  endfunction

  task automatic load(input logic [31:0] x, input int g, input bit init);
    for (int k = 0; k < g; k++) begin
      @(negedge clk);
      nib = 3'(k); rd_data = x[4*k +: 4]; ld_new = !init; ld_init = init;
    end
    @(negedge clk);
    ld_new = 0; ld_init = 0;
  endtask

  initial begin
    logic [31:0] xc, xn, mask;
    logic [15:0] pc, pn;
    logic [7:0] uu;
    bit exp_acc;
    int g, p, force_case;
    nib = 0; rd_data = 0; u = 0; p_cur = 0; p_new = 0; prec = PREC_4;
    #12 rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      p = n % 4; prec = prec_e'(p); g = 1 << p;
      mask = (g == 8) ? 32'hffffffff : ((32'd1 << (4*g)) - 1);
      xc = $urandom & mask; xn = $urandom & mask;
      load(xc, g, 1);
      `CHECK(x_cur == xc, ("x_cur %h exp %h", x_cur, xc))
      `CHECK(idx_cur == top_bits(xc, p), ("idx_cur"))
      nib = 3'($urandom_range(g - 1)); #1;
      `CHECK(cur_nibble == xc[4*nib +: 4], ("cur_nibble"))
      load(xn, g, 0);
      `CHECK(x_new == xn, ("x_new %h exp %h", x_new, xn))
      `CHECK(idx_new == top_bits(xn, p), ("idx_new"))
      pc = 16'($urandom); pn = 16'($urandom); uu = 8'($urandom);
      force_case = n % 10;
      if (force_case == 1) begin uu = 0; pn = 16'($urandom_range(65535, 1)); end
      if (force_case == 2) pn = 0;
      if (force_case == 3) begin uu = 255; pn = pc; end
      if (force_case == 4) pn = 16'(pc >> 1);
      u = uu; p_cur = pc; p_new = pn;
      exp_acc = (longint'(uu) * longint'(pc)) < (longint'(pn) * 256);
      calc = 1;
      @(negedge clk);
      calc = 0;
      `CHECK(accept == exp_acc, ("u %0d pc %0d pn %0d accept %b", uu, pc, pn, accept))
      `CHECK(x_cur == (exp_acc ? xn : xc), ("x_cur after check %h", x_cur))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
