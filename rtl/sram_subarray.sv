// sram_subarray: the 6T bitcell array of one compartment (64 rows x 64
// columns, 16 groups of 4 columns), written as a register array.
//
// Each cycle at most one word line is high (one-hot `wl`). The selected row
// is always visible on `bl` (BL; BLB is its complement and is not carried).
// At the rising clock edge the selected row is updated by one of two
// operations:
//   * pseudo-read (`prd`): every cell of the row whose group is precharged
//     (`pre`) is XORed with the matching `flip` bit from the bitcell noise
//     model. Cells of the row in unprecharged groups and cells of other rows
//     keep their data, as the paper's half-selected cells do.
//   * write (`wr_en`): cells with `wr_mask` set take `wr_data`. The write
//     comes either from the write drivers (memory mode) or from the copy
//     buffers (copy mode); the compartment chooses.
// The paper gives the array organisation and which cells each operation
// touches; modelling the analog pseudo-read as an XOR with flip bits is
// this design's choice. The array is not reset, like an SRAM.
module sram_subarray
  import mcmc_pkg::*;
(
  input  logic                clk,
  input  logic [ROWS-1:0]     wl,
  input  logic [N_GRP-1:0]    pre,
  input  logic                prd,
  input  logic [COLS-1:0]     flip,
  input  logic                wr_en,
  input  logic [COLS-1:0]     wr_mask,
  input  logic [COLS-1:0]     wr_data,
  output logic [COLS-1:0]     bl
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] pre_cols;

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) pre_cols[c] = pre[c / GRP_COLS];
  end

  always_comb begin
    bl = '0;
    for (int r = 0; r < int'(ROWS); r++) begin
      if (wl[r]) bl = bl | mem[r];
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(ROWS); r++) begin
      if (wl[r]) begin
        if (prd) mem[r] <= mem[r] ^ (flip & pre_cols);
        else if (wr_en) mem[r] <= (mem[r] & ~wr_mask) | (wr_data & wr_mask);
      end
    end
  end

  // Only one word line at a time; never pseudo-read and write together.
  a_wl_onehot: assert property (@(posedge clk) $onehot0(wl));
  a_op_excl:   assert property (@(posedge clk) !(prd && wr_en));

endmodule
