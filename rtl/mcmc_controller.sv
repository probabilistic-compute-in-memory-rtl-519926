// mcmc_controller: sequencer of the Metropolis-Hastings loop of the macro.
//
// After `start` it walks the sample address A from a_start to a_end (sample
// slots of one compartment at the chosen precision) and issues the same
// command sequence to all compartments, one chain per compartment:
//
//   A = a_start (first sample): RANDOM, READ (value becomes x0), FORWARD
//   every later A:              RANDOM, READ, CALCULATE, RESTORE, FORWARD
//
//   RANDOM    1 cycle     pseudo-read of slot A (all its G groups at once);
//                         also starts the shared [0,1] RNG
//   READ      G cycles    one 4-bit group per cycle into the candidate x*
//   CALCULATE 1 cycle     accept/reject check in every compartment
//   RESTORE   2G cycles   copy slot A-1 -> A, word lines only in the
//                         compartments that rejected
//   FORWARD   2G cycles   copy slot A -> A+1 in all compartments, so the
//                         next pseudo-read starts from the current value
//
// (G = 1, 2, 4, 8 groups for 4/8/16/32-bit samples; COPY_CYC cycles per
// group copy.) This is the flow chart and the per-compartment timing diagram
// of the paper. Copies run within one row, as in the paper; where slot A-1
// or A+1 lies in another row, the step instead writes the chain's held value
// through the R/W circuit, G cycles. That fallback, the cycle counts and the
// FORWARD step being skipped at a_end are this design's choices.
//
// Interface: `start` is taken when idle and the configuration is valid
// (a_start <= a_end < slots at that precision); otherwise `cfg_err` pulses.
// `busy` is high while running, `done` pulses at the end. The ev_* outputs
// pulse once at the first cycle of each operation, for counting.
module mcmc_controller
  import mcmc_pkg::*;
#(
  parameter int unsigned COPY_CYC = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  prec_e         prec,
  input  logic [AW-1:0] a_start,
  input  logic [AW-1:0] a_end,
  output macro_op_t     op,
  output logic          rng_start,
  output logic          busy,
  output logic          done,
  output logic          cfg_err,
  output logic          ev_random,
  output logic          ev_calc,
  output logic          ev_rest_copy,
  output logic          ev_rest_write,
  output logic          ev_fwd_copy,
  output logic          ev_fwd_write
);

  typedef enum logic [2:0] {
    S_IDLE, S_RAND, S_READ, S_CALC, S_REST, S_FWD, S_DONE
  } ctl_state_e;

  localparam int unsigned CW = $clog2(COPY_CYC + 1);

  ctl_state_e        state;
  prec_e             prec_q;
  logic [AW-1:0]     addr, a_end_q;
  logic              first;
  logic [NIB_AW-1:0] sub;
  logic [CW-1:0]     cyc;

  // Address decomposition at the latched precision.
  logic [3:0]        slot_bits;
  logic [AW-1:0]     slot_mask;
  logic [NIB_AW-1:0] g_last;          // G-1
  logic [ROW_AW-1:0] row_a;
  logic [GRP_AW-1:0] fgrp_a, fgrp_prev, fgrp_next;
  logic              slot_first, slot_last;
  logic              cfg_ok;
  logic              wrap_rest, wrap_fwd, sub_end, step_end;

  assign slot_bits  = 4'(GRP_AW) - 4'(prec_q);
  assign slot_mask  = AW'((1 << slot_bits) - 1);
  assign g_last     = NIB_AW'(groups_of(prec_q) - 1);
  assign row_a      = ROW_AW'(addr >> slot_bits);
  assign fgrp_a     = GRP_AW'((addr & slot_mask) << prec_q);
  assign fgrp_prev  = GRP_AW'(((addr - 1'b1) & slot_mask) << prec_q);
  assign fgrp_next  = GRP_AW'(((addr + 1'b1) & slot_mask) << prec_q);
  assign slot_first = (addr & slot_mask) == '0;
  assign slot_last  = (addr & slot_mask) == slot_mask;
  assign wrap_rest  = slot_first;
  assign wrap_fwd   = slot_last;

  assign cfg_ok = (a_start <= a_end) && ({1'b0, a_end} < (AW+1)'(slots_of(prec)));

  assign sub_end = (sub == g_last);
  // End of one group step in RESTORE / FORWARD.
  always_comb begin
    step_end = 1'b1;
    if (state == S_REST && !wrap_rest) step_end = (cyc == CW'(COPY_CYC - 1));
    if (state == S_FWD  && !wrap_fwd)  step_end = (cyc == CW'(COPY_CYC - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      prec_q  <= PREC_4;
      addr    <= '0;
      a_end_q <= '0;
      first   <= 1'b0;
      sub     <= '0;
      cyc     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && cfg_ok) begin
          prec_q  <= prec;
          addr    <= a_start;
          a_end_q <= a_end;
          first   <= 1'b1;
          state   <= S_RAND;
        end
        S_RAND: begin
          sub   <= '0;
          state <= S_READ;
        end
        S_READ: begin
          if (sub_end) begin
            sub <= '0;
            cyc <= '0;
            if (!first)              state <= S_CALC;
            else if (addr == a_end_q) state <= S_DONE;
            else                     state <= S_FWD;
          end else begin
            sub <= sub + 1'b1;
          end
        end
        S_CALC: begin
          sub   <= '0;
          cyc   <= '0;
          state <= S_REST;
        end
        S_REST, S_FWD: begin
          if (!step_end) begin
            cyc <= cyc + 1'b1;
          end else begin
            cyc <= '0;
            if (!sub_end) begin
              sub <= sub + 1'b1;
            end else begin
              sub <= '0;
              if (state == S_REST && addr == a_end_q) begin
                state <= S_DONE;
              end else if (state == S_REST) begin
                state <= S_FWD;
              end else begin
                addr  <= addr + 1'b1;
                first <= 1'b0;
                state <= S_RAND;
              end
            end
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Command of the current cycle.
  always_comb begin
    op          = '0;
    op.mode     = MODE_OFF;
    op.prec     = prec_q;
    op.row      = row_a;
    unique case (state)
      S_RAND: begin
        op.mode = MODE_RNG;
        op.grp  = fgrp_a;
      end
      S_READ: begin
        op.mode    = MODE_MEMORY;
        op.grp     = fgrp_a + GRP_AW'(sub);
        op.nib     = sub;
        op.ld_init = first;
        op.ld_new  = !first;
      end
      S_CALC: op.calc = 1'b1;
      S_REST: begin
        op.only_rej = 1'b1;
        op.grp      = fgrp_a + GRP_AW'(sub);
        op.nib      = sub;
        if (wrap_rest) begin
          op.mode     = MODE_MEMORY;
          op.we       = 1'b1;
          op.wsel_cur = 1'b1;
        end else begin
          op.mode     = MODE_COPY;
          op.src_grp  = fgrp_prev + GRP_AW'(sub);
        end
      end
      S_FWD: begin
        op.nib = sub;
        if (wrap_fwd) begin
          op.mode     = MODE_MEMORY;
          op.we       = 1'b1;
          op.wsel_cur = 1'b1;
          op.row      = row_a + 1'b1;
          op.grp      = GRP_AW'(sub);
        end else begin
          op.mode     = MODE_COPY;
          op.src_grp  = fgrp_a + GRP_AW'(sub);
          op.grp      = fgrp_next + GRP_AW'(sub);
        end
      end
      default: ;
    endcase
  end

  logic op_first;
  assign op_first = (sub == '0) && (cyc == '0);

  assign rng_start     = (state == S_RAND);
  assign busy          = (state != S_IDLE);
  assign done          = (state == S_DONE);
  assign cfg_err       = (state == S_IDLE) && start && !cfg_ok;
  assign ev_random     = (state == S_RAND);
  assign ev_calc       = (state == S_CALC);
  assign ev_rest_copy  = (state == S_REST) && !wrap_rest && op_first;
  assign ev_rest_write = (state == S_REST) &&  wrap_rest && op_first;
  assign ev_fwd_copy   = (state == S_FWD)  && !wrap_fwd  && op_first;
  assign ev_fwd_write  = (state == S_FWD)  &&  wrap_fwd  && op_first;

endmodule
