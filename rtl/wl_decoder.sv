// wl_decoder: word-line decoder of one sub-array.
//
// Turns a row address into a one-hot word-line vector. `en` gates all word
// lines; it is how the controller keeps the word lines of a compartment low
// (for example the compartments that accepted their sample while the others
// restore the previous one). Purely combinational. The paper only names the
// decoder as conventional; this is the plain one-hot decoder.
module wl_decoder #(
  parameter int unsigned ROWS = 64,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic [AW-1:0]   row,
  input  logic            en,
  output logic [ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    for (int r = 0; r < int'(ROWS); r++) begin
      wl[r] = en && (row == AW'(r));
    end
  end

endmodule
