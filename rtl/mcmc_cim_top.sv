// mcmc_cim_top: the probabilistic compute-in-memory MCMC macro.
//
// 64 compartments of 64 x 64 6T bitcells (256 kb) run 64 Markov chains in
// lock step. Per sample address the controller pseudo-reads the candidate
// slot in every compartment (block-wise RNG), reads it out while the shared
// accurate [0,1] RNG makes one 8-bit u, lets each compartment's calculation
// circuit accept or reject, restores the previous sample by in-memory copy
// where rejected, and copies the chain value forward to the next slot. At the
// end, slots a_start..a_end of every compartment hold that compartment's
// chain, x0 first. One u serves all compartments, as in the paper.
//
// Host interface (plain SRAM-like, usable while idle):
//   mem_en/mem_we/mem_comp/mem_row/mem_grp/mem_wdata write or read one 4-bit
//   group; read data appears on mem_rdata in the next cycle and holds.
//   pdf_we/pdf_addr/pdf_wdata program the target density table.
//   start/prec/a_start/a_end run the sampler; busy/done/cfg_err report.
// Observation outputs: obs_calc pulses the cycle after each accept/reject
// check, with obs_u (the u used), obs_accept, obs_x_new (candidates) and
// obs_x_cur (chain values after the check). The cnt_* counters count checks,
// accepted and rejected samples, and each kind of copy or write-back step
// since reset. `err` flags a malformed in-memory copy.
//
// The randomness of the bitcells comes from bitcell_flip_model, a
// behavioural model of the analog pseudo-read; everything else is
// synthesizable. The structure follows the paper; the host interface, the
// density table and the observation outputs are this design's additions.
module mcmc_cim_top
  import mcmc_pkg::*;
#(
  parameter int unsigned N_COMP        = 64,
  parameter int unsigned COPY_CYC      = 2,
  parameter int unsigned BFR_PER_MILLE = 450,
  parameter int unsigned SEED          = 1,
  localparam int unsigned CAW          = $clog2(N_COMP)
) (
  input  logic                clk,
  input  logic                rst_n,
  // sampler control
  input  logic                start,
  input  prec_e               prec,
  input  logic [AW-1:0]       a_start,
  input  logic [AW-1:0]       a_end,
  output logic                busy,
  output logic                done,
  output logic                cfg_err,
  // memory mode port
  input  logic                mem_en,
  input  logic                mem_we,
  input  logic [CAW-1:0]      mem_comp,
  input  logic [ROW_AW-1:0]   mem_row,
  input  logic [GRP_AW-1:0]   mem_grp,
  input  logic [GRP_COLS-1:0] mem_wdata,
  output logic [GRP_COLS-1:0] mem_rdata,
  // target density table
  input  logic                pdf_we,
  input  logic [TAB_BITS-1:0] pdf_addr,
  input  logic [PW-1:0]       pdf_wdata,
  // observation
  output logic                obs_calc,
  output logic [UW-1:0]       obs_u,
  output logic [N_COMP-1:0]   obs_accept,
  output logic [XW-1:0]       obs_x_new [N_COMP],
  output logic [XW-1:0]       obs_x_cur [N_COMP],
  output logic [31:0]         cnt_calc,
  output logic [31:0]         cnt_accept,
  output logic [31:0]         cnt_reject,
  output logic [31:0]         cnt_random,
  output logic [31:0]         cnt_rest_copy,
  output logic [31:0]         cnt_rest_write,
  output logic [31:0]         cnt_fwd_copy,
  output logic [31:0]         cnt_fwd_write,
  output logic                err
);

  macro_op_t           ctl_op, op;
  logic                rng_start, u_valid;
  logic [UW-1:0]       u;
  logic [RNG_CELLS-1:0] rng_flip;
  logic                ev_random, ev_calc, ev_rest_copy, ev_rest_write, ev_fwd_copy, ev_fwd_write;

  logic [N_COMP-1:0]   csel, acc_vec, err_vec;
  logic [COLS-1:0]     flip   [N_COMP];
  logic [TAB_BITS-1:0] idx_cur[N_COMP], idx_new[N_COMP];
  logic [PW-1:0]       p_cur  [N_COMP], p_new [N_COMP];
  logic [GRP_COLS-1:0] sa_out [N_COMP];
  logic [CAW-1:0]      rd_comp_q;

  mcmc_controller #(.COPY_CYC(COPY_CYC)) u_ctl (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .prec          (prec),
    .a_start       (a_start),
    .a_end         (a_end),
    .op            (ctl_op),
    .rng_start     (rng_start),
    .busy          (busy),
    .done          (done),
    .cfg_err       (cfg_err),
    .ev_random     (ev_random),
    .ev_calc       (ev_calc),
    .ev_rest_copy  (ev_rest_copy),
    .ev_rest_write (ev_rest_write),
    .ev_fwd_copy   (ev_fwd_copy),
    .ev_fwd_write  (ev_fwd_write)
  );

  // Host memory accesses while idle.
  always_comb begin
    op = ctl_op;
    for (int i = 0; i < int'(N_COMP); i++) csel[i] = 1'b1;
    if (!busy) begin
      op      = '0;
      op.mode = mem_en ? MODE_MEMORY : MODE_OFF;
      op.row  = mem_row;
      op.grp  = mem_grp;
      op.we   = mem_we;
      for (int i = 0; i < int'(N_COMP); i++) csel[i] = mem_en && (mem_comp == CAW'(i));
    end
  end

  // Shared accurate [0,1] RNG and its bitcell noise.
  bitcell_flip_model #(
    .N(RNG_CELLS), .BFR_PER_MILLE(BFR_PER_MILLE), .SEED(SEED + N_COMP)
  ) u_rng_noise (
    .clk(clk), .rst_n(rst_n), .en(busy), .flip(rng_flip)
  );

  accurate_rng u_rng (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (rng_start),
    .flip    (rng_flip),
    .u       (u),
    .u_valid (u_valid)
  );

  pdf_table #(.NRD(N_COMP)) u_pdf (
    .clk     (clk),
    .rst_n   (rst_n),
    .we      (pdf_we),
    .waddr   (pdf_addr),
    .wdata   (pdf_wdata),
    .idx_cur (idx_cur),
    .idx_new (idx_new),
    .p_cur   (p_cur),
    .p_new   (p_new)
  );

  for (genvar i = 0; i < int'(N_COMP); i++) begin : g_comp
    bitcell_flip_model #(
      .N(COLS), .BFR_PER_MILLE(BFR_PER_MILLE), .SEED(SEED + i)
    ) u_noise (
      .clk(clk), .rst_n(rst_n), .en(busy), .flip(flip[i])
    );

    compartment u_comp (
      .clk        (clk),
      .rst_n      (rst_n),
      .op         (op),
      .csel       (csel[i]),
      .host_wdata (mem_wdata),
      .flip       (flip[i]),
      .u          (u),
      .p_cur      (p_cur[i]),
      .p_new      (p_new[i]),
      .idx_cur    (idx_cur[i]),
      .idx_new    (idx_new[i]),
      .sa_out     (sa_out[i]),
      .x_cur      (obs_x_cur[i]),
      .x_new      (obs_x_new[i]),
      .accept     (acc_vec[i]),
      .err        (err_vec[i])
    );
  end

  assign obs_accept = acc_vec;
  assign err        = |err_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_comp_q <= '0;
    else if (!busy && mem_en && !mem_we) rd_comp_q <= mem_comp;
  end
  assign mem_rdata = sa_out[rd_comp_q];

  // Observation and event counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obs_calc       <= 1'b0;
      obs_u          <= '0;
      cnt_calc       <= '0;
      cnt_accept     <= '0;
      cnt_reject     <= '0;
      cnt_random     <= '0;
      cnt_rest_copy  <= '0;
      cnt_rest_write <= '0;
      cnt_fwd_copy   <= '0;
      cnt_fwd_write  <= '0;
    end else begin
      obs_calc <= ev_calc;
      if (ev_calc) begin
        obs_u    <= u;
        cnt_calc <= cnt_calc + 1;
      end
      if (obs_calc) begin
        cnt_accept <= cnt_accept + 32'($countones(acc_vec));
        cnt_reject <= cnt_reject + 32'(N_COMP) - 32'($countones(acc_vec));
      end
      if (ev_random)     cnt_random     <= cnt_random + 1;
      if (ev_rest_copy)  cnt_rest_copy  <= cnt_rest_copy + 1;
      if (ev_rest_write) cnt_rest_write <= cnt_rest_write + 1;
      if (ev_fwd_copy)   cnt_fwd_copy   <= cnt_fwd_copy + 1;
      if (ev_fwd_write)  cnt_fwd_write  <= cnt_fwd_write + 1;
    end
  end

  // The check always finds a fresh u.
  a_u_ready: assert property (@(posedge clk) disable iff (!rst_n) ev_calc |-> u_valid);

endmodule
