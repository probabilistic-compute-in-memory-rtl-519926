// rw_circuit: sense amplifiers and write drivers of one compartment, with the
// column multiplexer that picks one 4-column group of the active row.
//
// Read: `rd_data` is the selected group of the active row (the sense
// amplifier decision, combinational). When `re` is high at a clock edge it is
// also latched into `sa_out`, which otherwise keeps its value, as the SAout
// traces of the paper's function simulation do.
// Write: when `we` is high the drivers put `wdata` on the selected group;
// `wr_mask`/`wr_data` carry it to the array, which writes it at the edge.
// The paper names these circuits without detail; this is the plain digital
// behaviour of a 4-bit-wide SRAM port.
module rw_circuit
  import mcmc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [COLS-1:0]     bl,
  input  logic [GRP_AW-1:0]   grp,
  input  logic                re,
  input  logic                we,
  input  logic [GRP_COLS-1:0] wdata,
  output logic [GRP_COLS-1:0] rd_data,
  output logic [GRP_COLS-1:0] sa_out,
  output logic [COLS-1:0]     wr_mask,
  output logic [COLS-1:0]     wr_data
);

  assign rd_data = bl[grp*GRP_COLS +: GRP_COLS];

  always_comb begin
    wr_mask = '0;
    wr_data = '0;
    wr_mask[grp*GRP_COLS +: GRP_COLS] = {GRP_COLS{we}};
    wr_data[grp*GRP_COLS +: GRP_COLS] = wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sa_out <= '0;
    else if (re) sa_out <= rd_data;
  end

endmodule
