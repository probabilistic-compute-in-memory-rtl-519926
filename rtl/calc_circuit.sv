// calc_circuit: accept/reject check of one compartment's Markov chain.
//
// It holds the chain's current value x_i (`x_cur`) and assembles the
// candidate x* (`x_new`) from the 4-bit reads of the R/W circuit, one nibble
// per read (`ld_new`, nibble `nib`; the first nibble clears the rest). The
// proposal of the pseudo-read is symmetric, so the Metropolis-Hastings ratio
// reduces to p(x*)/p(x_i). With u = R3/256 the test u < p(x*)/p(x_i)
// becomes the integer comparison
//        accept  <=>  R3 * p(x_i) < 256 * p(x*),
// evaluated on `calc`; on accept x_cur takes x*. `accept` holds the last
// decision. The first value of a chain is loaded with `ld_init`.
// `p_cur`/`p_new` come from the density table, indexed by `idx_cur`/`idx_new`.
//
// The paper's text states the comparison as "if p(x_i) > u*p(x*), accept",
// which contradicts its own Algorithm 1 and flow chart (accept if
// u < p(x*)/p(x_i)); this circuit follows the algorithm.
// Timing: every update at the rising edge; idx/p are combinational.
module calc_circuit
  import mcmc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  prec_e               prec,
  input  logic                ld_new,
  input  logic                ld_init,
  input  logic [NIB_AW-1:0]   nib,
  input  logic [GRP_COLS-1:0] rd_data,
  input  logic                calc,
  input  logic [UW-1:0]       u,
  input  logic [PW-1:0]       p_cur,
  input  logic [PW-1:0]       p_new,
  output logic [TAB_BITS-1:0] idx_cur,
  output logic [TAB_BITS-1:0] idx_new,
  output logic [XW-1:0]       x_cur,
  output logic [XW-1:0]       x_new,
  output logic                accept,
  output logic [GRP_COLS-1:0] cur_nibble
);

  logic accept_d;
  logic [UW+PW-1:0] lhs, rhs;

  assign lhs      = (UW+PW)'(u) * (UW+PW)'(p_cur);
  assign rhs      = (UW+PW)'(p_new) << UW;
  assign accept_d = lhs < rhs;

  assign idx_cur    = tab_index(x_cur, prec);
  assign idx_new    = tab_index(x_new, prec);
  assign cur_nibble = x_cur[nib*GRP_COLS +: GRP_COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_cur  <= '0;
      x_new  <= '0;
      accept <= 1'b0;
    end else begin
      if (ld_new) begin
        if (nib == '0) x_new <= XW'(rd_data);
        else           x_new[nib*GRP_COLS +: GRP_COLS] <= rd_data;
      end
      if (ld_init) begin
        if (nib == '0) x_cur <= XW'(rd_data);
        else           x_cur[nib*GRP_COLS +: GRP_COLS] <= rd_data;
      end
      if (calc) begin
        accept <= accept_d;
        if (accept_d) x_cur <= x_new;
      end
    end
  end

endmodule
