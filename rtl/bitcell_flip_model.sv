// bitcell_flip_model: BEHAVIOURAL MODEL, not synthesizable. It stands for the
// analog randomness of 6T bitcells under the pseudo-read condition.
//
// During a pseudo-read the cell supply CVDD is lowered (0.5 V) while both bit
// lines are held at 0.8 V and the word line is pulsed; thermal noise then
// flips each selected cell with a probability p_BFR (about 45% at 0.5 V and
// room temperature in the paper's 28 nm simulations). This model draws, for
// every cell of a row, an independent flip bit that is 1 with probability
// BFR_PER_MILLE/1000. The array XORs the flip bits into the selected cells,
// so a cell keeps its value with probability 1-p_BFR and inverts otherwise.
// Treating the effect as an independent flip per cell is this model's
// reading of the paper's "bit flip rate"; it makes the proposal symmetric,
// q(i,j) = q(j,i), as the paper states.
//
// Interface: when `en` is high at a rising clock edge a fresh vector appears
// on `flip` after that edge; otherwise `flip` holds. `flip` is zero after
// reset.
module bitcell_flip_model #(
  parameter int unsigned N             = 64,
  parameter int unsigned BFR_PER_MILLE = 450,
  parameter int unsigned SEED          = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [N-1:0] flip
);

  initial void'($urandom(SEED));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flip <= '0;
    end else if (en) begin
      for (int i = 0; i < int'(N); i++) begin
        flip[i] <= (($urandom % 1000) < BFR_PER_MILLE);
      end
    end
  end

endmodule
