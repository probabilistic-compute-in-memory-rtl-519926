// tb_mcmc_controller: the command stream of the sequencer, cycle by cycle.
// For several precisions and address ranges (with and without row
// boundaries) the testbench builds the expected list of commands from the
// schedule written out as plain loops (RANDOM 1, READ G, CALCULATE 1,
// RESTORE 2G, FORWARD 2G cycles; one-cycle write-backs instead of copies
// across a row boundary) and compares every cycle, then `done`. Also checks
// the 2+5G-cycle sample period inside a row, the event pulses and that an
// invalid range raises cfg_err and starts nothing.
`include "tb_util.svh"
module tb_mcmc_controller;
  import mcmc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  prec_e prec;
  logic [9:0] a_start, a_end;
  macro_op_t op;
  logic rng_start, busy, done, cfg_err;
  logic ev_random, ev_calc, ev_rest_copy, ev_rest_write, ev_fwd_copy, ev_fwd_write;
  always #5 clk = ~clk;

  mcmc_controller #(.COPY_CYC(2)) dut (.clk, .rst_n, .start, .prec, .a_start, .a_end, .op, .rng_start,
    .busy, .done, .cfg_err, .ev_random, .ev_calc, .ev_rest_copy, .ev_rest_write, .ev_fwd_copy, .ev_fwd_write);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  macro_op_t q [$];
  int n_rand, n_calc, n_rc, n_rw, n_fc, n_fw;

  function automatic macro_op_t mk(macro_mode_e m, int row, int grp, int src, int p, int nib);
    macro_op_t o;
    o = '0; o.mode = m; o.row = 6'(row); o.grp = 4'(grp); o.src_grp = 4'(src);
    o.prec = prec_e'(p); o.nib = 3'(nib);
    return o;
  endfunction

  task automatic build(int p, int as, int ae);
    int g, spr, row, slot, fg;
    macro_op_t o;
    q.delete();
    n_rand = 0; n_calc = 0; n_rc = 0; n_rw = 0; n_fc = 0; n_fw = 0;
    g = 1 << p; spr = 16 / g;
    for (int a = as; a <= ae; a++) begin
      row = a / spr; slot = a % spr; fg = slot * g;
      q.push_back(mk(MODE_RNG, row, fg, 0, p, 0)); n_rand++;
      for (int k = 0; k < g; k++) begin
        o = mk(MODE_MEMORY, row, fg + k, 0, p, k);
        o.ld_init = (a == as); o.ld_new = (a != as);
        q.push_back(o);
      end
      if (a != as) begin
        o = mk(MODE_OFF, row, 0, 0, p, 0); o.calc = 1; q.push_back(o); n_calc++;
        if (slot == 0) n_rw++; else n_rc++;
        for (int k = 0; k < g; k++) begin
          if (slot == 0) begin
            o = mk(MODE_MEMORY, row, fg + k, 0, p, k); o.we = 1; o.wsel_cur = 1; o.only_rej = 1;
            q.push_back(o);
          end else begin
            o = mk(MODE_COPY, row, fg + k, (slot - 1) * g + k, p, k); o.only_rej = 1;
            q.push_back(o); q.push_back(o);
          end
        end
      end
      if (a != ae) begin
        if (slot == spr - 1) n_fw++; else n_fc++;
        for (int k = 0; k < g; k++) begin
          if (slot == spr - 1) begin
            o = mk(MODE_MEMORY, row + 1, k, 0, p, k); o.we = 1; o.wsel_cur = 1;
            q.push_back(o);
          end else begin
            o = mk(MODE_COPY, row, (slot + 1) * g + k, fg + k, p, k);
            q.push_back(o); q.push_back(o);
          end
        end
      end
    end
  endtask

  task automatic run(int p, int as, int ae);
    int idx, c_rand, c_calc, c_rc, c_rw, c_fc, c_fw, last_rand, period_bad;
    build(p, as, ae);
    @(negedge clk);
    prec = prec_e'(p); a_start = 10'(as); a_end = 10'(ae); start = 1;
    @(negedge clk);
    start = 0;
    idx = 0; c_rand = 0; c_calc = 0; c_rc = 0; c_rw = 0; c_fc = 0; c_fw = 0;
    last_rand = -1; period_bad = 0;
    while (idx < q.size()) begin
      `CHECK(busy && op == q[idx], ("p%0d %0d..%0d cycle %0d: op %p exp %p", p, as, ae, idx, op, q[idx]))
      if (ev_random) begin
        // inside a row with no boundary step the period is 2+5G
        if (c_rand >= 2 && (idx - last_rand) != 2 + 5 * (1 << p) &&
            q[idx - 1].mode == MODE_COPY && q[last_rand + (1 << p) + 2].mode == MODE_COPY) period_bad++;
        last_rand = idx;
      end
      c_rand += int'(ev_random); c_calc += int'(ev_calc); c_rc += int'(ev_rest_copy);
      c_rw += int'(ev_rest_write); c_fc += int'(ev_fwd_copy); c_fw += int'(ev_fwd_write);
      `CHECK(rng_start == (op.mode == MODE_RNG), ("rng_start"))
      idx++;
      @(negedge clk);
    end
    `CHECK(done, ("done missing after %0d cycles", idx))
    @(negedge clk);
    `CHECK(!busy && !done, ("not idle after done"))
    `CHECK(period_bad == 0, ("sample period differs from 2+5G %0d times", period_bad))
    `CHECK(c_rand == n_rand && c_calc == n_calc && c_rc == n_rc && c_rw == n_rw && c_fc == n_fc && c_fw == n_fw,
           ("events %0d %0d %0d %0d %0d %0d exp %0d %0d %0d %0d %0d %0d", c_rand, c_calc, c_rc, c_rw, c_fc, c_fw,
            n_rand, n_calc, n_rc, n_rw, n_fc, n_fw))
  endtask

  initial begin
    prec = PREC_4; a_start = 0; a_end = 0;
    #12 rst_n = 1;
    run(0, 0, 40);
    run(0, 14, 18);
    run(0, 5, 5);
    run(1, 3, 20);
    run(2, 0, 9);
    run(3, 1, 6);
    run(0, 1000, 1023);
    // invalid ranges
    @(negedge clk);
    prec = PREC_32; a_start = 0; a_end = 128; start = 1;
    #1 `CHECK(cfg_err, ("a_end beyond 32-bit capacity not flagged"))
    @(negedge clk);
    start = 0;
    `CHECK(!busy, ("started with invalid range"))
    prec = PREC_4; a_start = 9; a_end = 8; start = 1;
    #1 `CHECK(cfg_err, ("a_start > a_end not flagged"))
    @(negedge clk);
    start = 0;
    `CHECK(!busy, ("started with invalid range"))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
