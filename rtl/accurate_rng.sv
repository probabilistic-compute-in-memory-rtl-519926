// accurate_rng: the accurate [0,1] random number generator shared by all
// compartments.
//
// A small array of 64 bitcells (8 groups of 8 columns, one row, no R/W
// circuits) and the MSXOR tree. One number u takes two array steps:
//   1. reset: the cells are flushed to 0 (in silicon, CVDD lowered and the
//      two precharge rails set to 0 V / 0.8 V), so that every raw bit
//      starts from the same value;
//   2. pseudo-read: both rails at 0.8 V, WL pulsed, each cell flips with
//      probability p_BFR (supplied by the bitcell noise model on `flip`).
// After that the XOR tree output R3 is a uniform 8-bit number; u = R3/256.
//
// Timing: `start` high in cycle t resets the cells at the end of cycle t;
// the pseudo-read happens at the end of t+1; from cycle t+2 `u` is valid and
// `u_valid` is high until the next `start`.
// The two-step sequence and the XOR tree follow the paper; the cycle
// allocation is this design's choice.
module accurate_rng
  import mcmc_pkg::*;
#(
  parameter int unsigned N_GROUPS   = RNG_GROUPS,
  parameter int unsigned GROUP_BITS = RNG_BITS,
  parameter int unsigned STAGES     = XOR_STAGES,
  localparam int unsigned N_CELLS   = N_GROUPS * GROUP_BITS,
  localparam int unsigned OUT_W     = (N_GROUPS >> STAGES) * GROUP_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [N_CELLS-1:0] flip,
  output logic [OUT_W-1:0]   u,
  output logic               u_valid
);

  logic [N_CELLS-1:0] cells;

  typedef enum logic [1:0] {R_IDLE, R_PRD, R_VALID} rng_state_e;
  rng_state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE;
      cells <= '0;
    end else if (start) begin
      cells <= '0;                 // step 1: reset
      state <= R_PRD;
    end else if (state == R_PRD) begin
      cells <= cells ^ flip;       // step 2: pseudo-read
      state <= R_VALID;
    end
  end

  assign u_valid = (state == R_VALID);

  msxor #(
    .N_GROUPS   (N_GROUPS),
    .GROUP_BITS (GROUP_BITS),
    .STAGES     (STAGES)
  ) u_msxor (
    .raw   (cells),
    .r_out (u)
  );

endmodule
