// compartment: one 4096-bitcell compartment of the macro with its own
// peripherals: word-line decoder, BL conditioning (PRE0..15), sub-array,
// sixteen select units with the copy buffers, R/W circuit and calculation
// circuit. All compartments receive the same command (`op`) each cycle and
// so run one Markov chain each, in lock step.
//
// Per command mode:
//   MODE_MEMORY  read (latched into `sa_out`, and into the calculation
//                circuit when op.ld_new/ld_init) or write one group of the
//                row; write data from the host or, with op.wsel_cur, the
//                chain's held value (used where a copy would cross rows);
//   MODE_RNG     pseudo-read of the sample's groups in the row;
//   MODE_COPY    copy group op.src_grp to group op.grp of the row.
// `csel` enables the compartment (host accesses select one); op.only_rej
// keeps the word line low in a compartment whose last check accepted, so
// that only rejecting chains restore their previous sample.
// The organisation follows the paper; the command encoding is this design's.
module compartment
  import mcmc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  macro_op_t           op,
  input  logic                csel,
  input  logic [GRP_COLS-1:0] host_wdata,
  input  logic [COLS-1:0]     flip,
  input  logic [UW-1:0]       u,
  input  logic [PW-1:0]       p_cur,
  input  logic [PW-1:0]       p_new,
  output logic [TAB_BITS-1:0] idx_cur,
  output logic [TAB_BITS-1:0] idx_new,
  output logic [GRP_COLS-1:0] sa_out,
  output logic [XW-1:0]       x_cur,
  output logic [XW-1:0]       x_new,
  output logic                accept,
  output logic                err
);

  logic                wl_en;
  logic [ROWS-1:0]     wl;
  logic [N_GRP-1:0]    pre;
  logic [COLS-1:0]     bl;
  logic [COLS-1:0]     rw_mask, rw_data, cp_mask, cp_data, wr_mask, wr_data;
  logic                is_mem, is_rng, is_copy, wr_en;
  logic [GRP_COLS-1:0] rd_data, cur_nibble, wdata;
  logic [N_GRP-1:0]    a_sel, b_sel;

  assign is_mem  = (op.mode == MODE_MEMORY);
  assign is_rng  = (op.mode == MODE_RNG);
  assign is_copy = (op.mode == MODE_COPY);
  assign wl_en   = csel && (op.mode != MODE_OFF) && !(op.only_rej && accept);

  wl_decoder #(.ROWS(ROWS)) u_wl (.row(op.row), .en(wl_en), .wl(wl));

  bl_conditioning u_pre (.mode(op.mode), .prec(op.prec), .first_grp(op.grp), .pre(pre));

  assign a_sel = is_copy ? (N_GRP'(1) << op.src_grp) : '0;
  assign b_sel = is_copy ? (N_GRP'(1) << op.grp)     : '0;

  copy_unit u_copy (
    .bl      (bl),
    .a       (a_sel),
    .b       (b_sel),
    .wr_mask (cp_mask),
    .wr_data (cp_data),
    .err     (err)
  );

  assign wdata = op.wsel_cur ? cur_nibble : host_wdata;

  rw_circuit u_rw (
    .clk     (clk),
    .rst_n   (rst_n),
    .bl      (bl),
    .grp     (op.grp),
    .re      (is_mem && !op.we && wl_en),
    .we      (is_mem && op.we),
    .wdata   (wdata),
    .rd_data (rd_data),
    .sa_out  (sa_out),
    .wr_mask (rw_mask),
    .wr_data (rw_data)
  );

  assign wr_en   = (is_mem && op.we) || is_copy;
  assign wr_mask = is_copy ? cp_mask : rw_mask;
  assign wr_data = is_copy ? cp_data : rw_data;

  sram_subarray u_array (
    .clk     (clk),
    .wl      (wl),
    .pre     (pre),
    .prd     (is_rng),
    .flip    (flip),
    .wr_en   (wr_en),
    .wr_mask (wr_mask),
    .wr_data (wr_data),
    .bl      (bl)
  );

  calc_circuit u_calc (
    .clk        (clk),
    .rst_n      (rst_n),
    .prec       (op.prec),
    .ld_new     (op.ld_new && csel),
    .ld_init    (op.ld_init && csel),
    .nib        (op.nib),
    .rd_data    (rd_data),
    .calc       (op.calc && csel),
    .u          (u),
    .p_cur      (p_cur),
    .p_new      (p_new),
    .idx_cur    (idx_cur),
    .idx_new    (idx_new),
    .x_cur      (x_cur),
    .x_new      (x_new),
    .accept     (accept),
    .cur_nibble (cur_nibble)
  );

endmodule
