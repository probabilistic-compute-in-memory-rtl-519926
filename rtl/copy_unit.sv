// copy_unit: in-memory copy path of one compartment: sixteen select units
// and the eight unidirectional buffers (Buffer0..7, BFA -> BFB) they share.
//
// With the word line of a row high, the group whose A control is set puts
// its four cells (and their complements) on BFA0..7; the buffers restore the
// levels onto BFB0..7; the group whose B control is set takes them as write
// data. The result is a copy of one 4-bit group to another group of the same
// row without the R/W circuits, as in the paper's in-memory copy scheme.
// Wider samples are copied one group at a time.
//
// Interface: `a`/`b` are one-hot group selects (zero when idle). Outputs
// are the write mask and data for the row (4 bits per group) and an error
// flag. Combinational; the caller holds the controls for as many cycles as
// the copy takes (two in this design). The buffers are modelled as ideal
// wires, since their only job is drive strength.
module copy_unit
  import mcmc_pkg::*;
(
  input  logic [COLS-1:0]  bl,
  input  logic [N_GRP-1:0] a,
  input  logic [N_GRP-1:0] b,
  output logic [COLS-1:0]  wr_mask,
  output logic [COLS-1:0]  wr_data,
  output logic             err
);

  logic [BUS_W-1:0] bfa_g [N_GRP];
  logic [BUS_W-1:0] bfa, bfb;
  logic [N_GRP-1:0] wen_g, bad_g;
  logic [GRP_COLS-1:0] wd_g [N_GRP];

  for (genvar g = 0; g < int'(N_GRP); g++) begin : g_sel
    select_unit u_sel (
      .bl       (bl[g*GRP_COLS +: GRP_COLS]),
      .a        (a[g]),
      .b        (b[g]),
      .bfb      (bfb),
      .bfa      (bfa_g[g]),
      .wr_en    (wen_g[g]),
      .wr_data  (wd_g[g]),
      .bad_pair (bad_g[g])
    );
    assign wr_mask[g*GRP_COLS +: GRP_COLS] = {GRP_COLS{wen_g[g]}};
    assign wr_data[g*GRP_COLS +: GRP_COLS] = wd_g[g];
  end

  // Shared bus (wired OR of the sources) and the buffers.
  always_comb begin
    bfa = '0;
    for (int g = 0; g < int'(N_GRP); g++) bfa = bfa | bfa_g[g];
  end
  assign bfb = bfa;

  // A copy needs exactly one source when there is a destination, and a group
  // cannot be both.
  assign err = (|b && ((a == '0) || ((a & (a - 1'b1)) != '0))) || (|(a & b)) || (|bad_g);

endmodule
