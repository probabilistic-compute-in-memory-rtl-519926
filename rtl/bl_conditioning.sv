// bl_conditioning: precharge (PRE) enables of one sub-array, one per group
// of 4 columns, as PRE0..PRE15 in the paper's sub-array drawing.
//
// In block-wise RNG mode only the groups of the sample being generated are
// precharged, so that a pseudo-read of the active row disturbs only those
// cells: groups first_grp .. first_grp+G-1, G = 1, 2, 4 or 8 from the sample
// precision (the paper's expandable precision runs neighbouring groups'
// control signals in step). In memory mode every group is precharged, as in
// a normal SRAM read. In copy mode and when off, no group is precharged,
// since the paper turns the conditioning circuits off in copy mode.
// Combinational.
module bl_conditioning
  import mcmc_pkg::*;
(
  input  macro_mode_e       mode,
  input  prec_e             prec,
  input  logic [GRP_AW-1:0] first_grp,
  output logic [N_GRP-1:0]  pre
);

  always_comb begin
    pre = '0;
    unique case (mode)
      MODE_MEMORY: pre = '1;
      MODE_RNG: begin
        for (int g = 0; g < int'(N_GRP); g++) begin
          pre[g] = (g >= int'(first_grp)) && (g < int'(first_grp) + int'(groups_of(prec)));
        end
      end
      default: pre = '0;
    endcase
  end

endmodule
