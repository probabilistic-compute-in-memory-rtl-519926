// pdf_table: the target density p(x) as a host-written table of unsigned
// weights, read by every compartment's calculation circuit.
//
// The paper says only that p(x) is evaluated by "peripheral digital logic";
// a look-up table indexed by the top TAB_BITS bits of the sample is this
// design's way of doing that for any density. Weights need not be
// normalised, since only the ratio p(x*)/p(x_i) matters.
// Write: `we` at a clock edge stores `wdata` at `waddr`. Read: NRD pairs of
// combinational read ports (current and candidate value of one chain).
// Reset clears the table.
module pdf_table
  import mcmc_pkg::*;
#(
  parameter int unsigned NRD = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [TAB_BITS-1:0] waddr,
  input  logic [PW-1:0]       wdata,
  input  logic [TAB_BITS-1:0] idx_cur [NRD],
  input  logic [TAB_BITS-1:0] idx_new [NRD],
  output logic [PW-1:0]       p_cur   [NRD],
  output logic [PW-1:0]       p_new   [NRD]
);

  logic [PW-1:0] tab [2**TAB_BITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2**TAB_BITS; i++) tab[i] <= '0;
    end else if (we) begin
      tab[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NRD); i++) begin
      p_cur[i] = tab[idx_cur[i]];
      p_new[i] = tab[idx_new[i]];
    end
  end

endmodule
