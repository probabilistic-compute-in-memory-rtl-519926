// select_unit: the switches between one 4-column group and the shared copy
// bus of its compartment.
//
// Control A (source) connects the group's four BL/BLB pairs of the active
// row to the buffer inputs BFA0..7; control B (destination) connects the
// buffer outputs BFB0..7 back to the group's BL/BLB, which writes them into
// the cells of the active row. The bus lines are taken in column order,
// BFx[2k] = BL_k and BFx[2k+1] = BLB_k (the drawing shows eight lines per
// bus but not their order; this order is this design's choice). The bus is
// modelled as a wired OR, so an unselected unit drives zero.
// `bad_pair` flags a destination whose incoming BL/BLB lines are not
// complementary, which would leave the written cells undefined.
// Combinational.
module select_unit
  import mcmc_pkg::*;
(
  input  logic [GRP_COLS-1:0] bl,       // the group's cells in the active row
  input  logic                a,
  input  logic                b,
  input  logic [BUS_W-1:0]    bfb,
  output logic [BUS_W-1:0]    bfa,
  output logic                wr_en,
  output logic [GRP_COLS-1:0] wr_data,
  output logic                bad_pair
);

  always_comb begin
    bfa      = '0;
    wr_data  = '0;
    bad_pair = 1'b0;
    for (int k = 0; k < int'(GRP_COLS); k++) begin
      bfa[2*k]     = a & bl[k];
      bfa[2*k + 1] = a & ~bl[k];
      wr_data[k]   = bfb[2*k];
      if (b && (bfb[2*k] == bfb[2*k + 1])) bad_pair = 1'b1;
    end
    wr_en = b;
  end

endmodule
