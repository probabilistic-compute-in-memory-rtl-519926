// msxor: multi-stage XOR (MSXOR) tree of the accurate [0,1] RNG.
//
// The raw bits come as N_GROUPS groups of GROUP_BITS bits, R0^0..R0^7 in the
// paper, each bit 1 with probability lambda0 = p_BFR. Each stage XORs two
// groups bit by bit, halving the number of groups: R(s+1)^k[j] =
// Rs^(2k)[j] xor Rs^(2k+1)[j]. If the inputs of a gate are independent and
// each 1 with probability lambda, its output is 1 with probability
// 2*lambda*(1-lambda), which tends to 0.5; with p_BFR = 0.4 three stages give
// 0.49999872. Defaults: 8 groups of 8 bits, 3 stages (32, 16 and 8 XOR
// gates), one 8-bit output R3. Gate counts follow the paper's figure
// (XOR1_0..31, then 16, then 8); the text's "64/32/16" counts bits. Which two
// groups meet at a gate is not fully legible in the figure; pairing groups
// 2k and 2k+1 is this design's choice and does not change the statistics.
// Combinational.
module msxor #(
  parameter int unsigned N_GROUPS   = 8,
  parameter int unsigned GROUP_BITS = 8,
  parameter int unsigned STAGES     = 3,
  localparam int unsigned IN_W      = N_GROUPS * GROUP_BITS,
  localparam int unsigned OUT_W     = (N_GROUPS >> STAGES) * GROUP_BITS
) (
  input  logic [IN_W-1:0]  raw,
  output logic [OUT_W-1:0] r_out
);

  always_comb begin
    logic [IN_W-1:0] st, nx;
    st = raw;
    for (int s = 0; s < int'(STAGES); s++) begin
      nx = '0;
      for (int k = 0; k < int'(N_GROUPS >> (s + 1)); k++) begin
        for (int j = 0; j < int'(GROUP_BITS); j++) begin
          nx[k*GROUP_BITS + j] = st[(2*k)*GROUP_BITS + j] ^ st[(2*k+1)*GROUP_BITS + j];
        end
      end
      st = nx;
    end
    r_out = st[OUT_W-1:0];
  end

endmodule
