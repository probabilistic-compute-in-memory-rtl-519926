// mcmc_pkg: sizes, types and helper functions shared by the probabilistic
// compute-in-memory MCMC macro.
//
// The macro holds 64 compartments, each a 64 x 64 array of 6T bitcells split
// into 16 groups of 4 columns (256 kb in all), plus one shared accurate [0,1]
// random number generator built from 64 bitcells and a 3-stage XOR tree.
// These numbers follow the paper. The width of the target-density weights
// (PW), the size of the density look-up table (TAB_BITS) and the width of the
// sample address (AW) are choices of this design.
//
// A sample of 4*G bits occupies G neighbouring groups of one row ("slot").
// G is 1, 2, 4 or 8 for 4-, 8-, 16- and 32-bit samples (prec_e).
package mcmc_pkg;

  // Sub-array geometry of one compartment.
  localparam int unsigned ROWS      = 64;
  localparam int unsigned COLS      = 64;
  localparam int unsigned GRP_COLS  = 4;                 // columns per group
  localparam int unsigned N_GRP     = COLS / GRP_COLS;   // 16 groups
  localparam int unsigned ROW_AW    = $clog2(ROWS);
  localparam int unsigned GRP_AW    = $clog2(N_GRP);

  // Copy bus: one BL and one BLB line per column of a group.
  localparam int unsigned BUS_W     = 2 * GRP_COLS;      // BFA0..7 / BFB0..7

  // Largest sample: 8 groups = 32 bits.
  localparam int unsigned MAX_G     = 8;
  localparam int unsigned XW        = GRP_COLS * MAX_G;  // 32
  localparam int unsigned NIB_AW    = $clog2(MAX_G);

  // Sample address inside one compartment: up to ROWS*N_GRP 4-bit slots.
  localparam int unsigned AW        = $clog2(ROWS * N_GRP); // 10

  // Accurate [0,1] RNG.
  localparam int unsigned RNG_GROUPS = 8;
  localparam int unsigned RNG_BITS   = 8;
  localparam int unsigned RNG_CELLS  = RNG_GROUPS * RNG_BITS; // 64
  localparam int unsigned XOR_STAGES = 3;
  localparam int unsigned UW         = RNG_BITS;              // width of u

  // Target density p(x): unsigned weights looked up by the top bits of a sample.
  localparam int unsigned PW        = 16;
  localparam int unsigned TAB_BITS  = 8;

  // Function-macro working modes (paper: memory, block-wise RNG, CIM copy).
  typedef enum logic [1:0] {
    MODE_OFF    = 2'd0,
    MODE_MEMORY = 2'd1,
    MODE_RNG    = 2'd2,
    MODE_COPY   = 2'd3
  } macro_mode_e;

  // Sample precision.
  typedef enum logic [1:0] {
    PREC_4  = 2'd0,
    PREC_8  = 2'd1,
    PREC_16 = 2'd2,
    PREC_32 = 2'd3
  } prec_e;

  // One cycle's command from the controller to every compartment.
  typedef struct packed {
    macro_mode_e          mode;
    logic [ROW_AW-1:0]    row;       // word line to raise
    logic [GRP_AW-1:0]    grp;       // R/W group, copy destination (B), first RNG group
    logic [GRP_AW-1:0]    src_grp;   // copy source (A)
    prec_e                prec;      // groups pseudo-read together
    logic                 we;        // memory mode: write (else read)
    logic                 wsel_cur;  // write data = held chain value nibble
    logic                 only_rej;  // word line only in compartments that rejected
    logic [NIB_AW-1:0]    nib;       // nibble of the sample this access carries
    logic                 ld_new;    // capture read data as candidate x*
    logic                 ld_init;   // capture read data as first chain value x0
    logic                 calc;      // run the accept/reject check
  } macro_op_t;

  // Number of groups per sample.
  function automatic int unsigned groups_of(prec_e p);
    return 1 << p;
  endfunction

  // Number of sample slots per compartment.
  function automatic int unsigned slots_of(prec_e p);
    return (ROWS * N_GRP) >> p;
  endfunction

  // Density-table index of a sample: its top min(4G, TAB_BITS) bits.
  function automatic logic [TAB_BITS-1:0] tab_index(logic [XW-1:0] x, prec_e p);
    logic [TAB_BITS-1:0] idx;
    unique case (p)
      PREC_4:  idx = TAB_BITS'(x[3:0]);
      PREC_8:  idx = x[7:0];
      PREC_16: idx = x[15:8];
      default: idx = x[31:24];
    endcase
    return idx;
  endfunction

endpackage
