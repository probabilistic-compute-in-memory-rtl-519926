// mcmc_top_checks.svh: end-to-end checks of mcmc_cim_top, shared by the
// reduced-size, the full-size and the distribution testbenches. The including module declares
// NC (number of compartments), the clock, every port signal of the top and
// the instance.
//
// A run seeds slot a_start of every compartment through the memory port,
// starts the sampler, records every accept/reject check from the
// observation outputs, and afterwards reads all slots back. The chain is
// then verified from the memory contents alone: slot a_start holds x0; for
// every later slot A the recorded decision must be u*p(x[A-1]) < 256*p(x*)
// with the testbench's own copy of the density table, and slot A must hold
// x* if accepted and x[A-1] otherwise. Also checked: the exact cycle count
// of the run (from the schedule), the candidates differing from the previous
// value in about p_BFR of their bits, the slot after a_end left untouched,
// and the counters. Every mechanism (pseudo-read, accept, reject, restore by
// copy, restore by write-back, forward copy, forward write-back, memory-mode
// write and read, the four precisions, a rejected configuration) must occur,
// and the u values seen must look uniform (mean and per-bit frequency).
//
// For the distribution tests, every run also bins the stored samples after
// the first burn_in slots of each chain into 16 bins of the density index
// (the index itself for 4-bit samples, its upper 4 bits otherwise, or with
// bin_mode = 1 a 4 x 4 grid of its two 4-bit halves read as x and y);
// dist_check() compares that histogram with the programmed density by total
// variation distance. Once a chain has reached a state of nonzero density it
// must never again hold a state of zero density.

  int checks = 0, failures = 0;
  logic [15:0] pdf_ref [256];
  logic [31:0] rec_xnew [NC][1024];
  logic        rec_acc  [NC][1024];
  logic [7:0]  rec_u    [1024];
  logic [31:0] memv     [1024];
  longint      ham_sum, ham_bits;
  int          ev_prec [4];
  int          ev_mem_w, ev_mem_r, ev_cfg_err;
  int          tot_accept, tot_reject;
  longint      u_sum, u_n;
  int          u_bit_ones [8];
  longint      hist [16];
  longint      hist_n;
  int          burn_in;
  int          bin_mode;

  function automatic int gof(int p); return 1 << p; endfunction
  function automatic logic [31:0] wmask(int p);
    return (p == 3) ? 32'hffffffff : ((32'd1 << (4 * gof(p))) - 1);
  endfunction
  function automatic logic [7:0] tidx(logic [31:0] x, int p);
    case (p)
      0: return {4'd0, x[3:0]};
      1: return x[7:0];
      2: return x[15:8];
      default: return x[31:24];
    endcase
  endfunction

  function automatic int bin_of(logic [7:0] t, int p);
    if (p == 0) return int'(t[3:0]);
    if (bin_mode == 1) return int'({t[7:6], t[3:2]});
    return int'(t[7:4]);
  endfunction

  task automatic host_idle();
    mem_en = 0; mem_we = 0; pdf_we = 0;
  endtask

  task automatic host_write(int c, int r, int g, logic [3:0] d);
    @(negedge clk);
    mem_en = 1; mem_we = 1; mem_comp = $bits(mem_comp)'(c); mem_row = 6'(r); mem_grp = 4'(g); mem_wdata = d;
    @(negedge clk);
    host_idle();
    ev_mem_w++;
  endtask

  task automatic host_read(int c, int r, int g, output logic [3:0] d);
    @(negedge clk);
    mem_en = 1; mem_we = 0; mem_comp = $bits(mem_comp)'(c); mem_row = 6'(r); mem_grp = 4'(g);
    @(negedge clk);
    host_idle();
    d = mem_rdata;
    ev_mem_r++;
  endtask

  task automatic slot_pos(int p, int a, int k, output int r, output int g);
    int spr;
    spr = 16 / gof(p);
    r = a / spr;
    g = (a % spr) * gof(p) + k;
  endtask

  task automatic write_slot(int c, int p, int a, logic [31:0] v);
    int r, g;
    for (int k = 0; k < gof(p); k++) begin
      slot_pos(p, a, k, r, g);
      host_write(c, r, g, v[4*k +: 4]);
    end
  endtask

  task automatic read_slot(int c, int p, int a, output logic [31:0] v);
    int r, g;
    logic [3:0] d;
    v = '0;
    for (int k = 0; k < gof(p); k++) begin
      slot_pos(p, a, k, r, g);
      host_read(c, r, g, d);
      v[4*k +: 4] = d;
    end
  endtask

  // Target density: a mixture of four Gaussians over the table index range,
  // with some zero-weight entries so that rejections by p(x*) = 0 occur too.
  task automatic program_pdf(int p);
    real span, x, w;
    real mu [4], sd [4], wt [4];
    span = (p == 0) ? 16.0 : 256.0;
    mu = '{0.15, 0.35, 0.6, 0.85}; sd = '{0.05, 0.08, 0.06, 0.1}; wt = '{1.0, 0.6, 0.8, 0.4};
    for (int i = 0; i < 256; i++) begin
      x = (real'(i) + 0.5) / span;
      w = 0.0;
      for (int m = 0; m < 4; m++) w += wt[m] * $exp(-((x - mu[m]) * (x - mu[m])) / (2.0 * sd[m] * sd[m]));
      pdf_ref[i] = (real'(i) >= span) ? 16'd0 : 16'($rtoi(w * 30000.0));
      if (i % 7 == 3) pdf_ref[i] = 16'd0;
      @(negedge clk);
      pdf_we = 1; pdf_addr = 8'(i); pdf_wdata = pdf_ref[i];
    end
    @(negedge clk);
    pdf_we = 0;
  endtask

  // The four-Gaussian mixture of the sampler's GMM benchmark: means -2, 0,
  // 3, 2.5 and standard deviations 1, 1, 5, 3, over x in [-10, 10] mapped
  // linearly onto the density index (16 entries for 4-bit samples, 256
  // otherwise). The weights are not given there; equal weights are used.
  // No entry is zero.
  task automatic program_pdf_gmm(int p);
    real n, x, w;
    real mu [4], sd [4];
    n = (p == 0) ? 16.0 : 256.0;
    mu = '{-2.0, 0.0, 3.0, 2.5}; sd = '{1.0, 1.0, 5.0, 3.0};
    for (int i = 0; i < 256; i++) begin
      x = -10.0 + (real'(i) + 0.5) * 20.0 / n;
      w = 0.0;
      for (int m = 0; m < 4; m++) w += 0.25 * $exp(-((x - mu[m]) * (x - mu[m])) / (2.0 * sd[m] * sd[m])) / sd[m];
      pdf_ref[i] = (real'(i) >= n) ? 16'd0 : 16'($rtoi(w * 100000.0) + 1);
      @(negedge clk);
      pdf_we = 1; pdf_addr = 8'(i); pdf_wdata = pdf_ref[i];
    end
    @(negedge clk);
    pdf_we = 0;
  endtask

  // A bivariate Gaussian for the MGD benchmark on a 16 x 16 grid: the upper
  // 4 bits of the density index are x, the lower 4 bits y, each mapped
  // linearly onto [-5, 5]. Zero mean and identity covariance are this
  // test's choice, as the benchmark's covariance is not given.
  task automatic program_pdf_mgd();
    real x, y;
    for (int i = 0; i < 256; i++) begin
      x = -5.0 + (real'(i >> 4) + 0.5) * 10.0 / 16.0;
      y = -5.0 + (real'(i & 15) + 0.5) * 10.0 / 16.0;
      pdf_ref[i] = 16'($rtoi(60000.0 * $exp(-(x * x + y * y) / 2.0)) + 1);
      @(negedge clk);
      pdf_we = 1; pdf_addr = 8'(i); pdf_wdata = pdf_ref[i];
    end
    @(negedge clk);
    pdf_we = 0;
  endtask

  function automatic int expected_cycles(int p, int as, int ae);
    int n, g, spr, slot;
    g = gof(p); spr = 16 / g; n = 0;
    for (int a = as; a <= ae; a++) begin
      slot = a % spr;
      n += 1 + g;
      if (a != as) n += 1 + ((slot == 0) ? g : 2 * g);
      if (a != ae) n += (slot == spr - 1) ? g : 2 * g;
    end
    return n;
  endfunction

  task automatic run(int p, int as, int ae);
    logic [31:0] seed [NC];
    logic [31:0] guard [NC];
    logic [31:0] v, prev, xn;
    int ncalc, cyc, has_guard;
    bit acc;
    int s_acc, s_rej, c0_acc, c0_rej;
    bit nz;
    c0_acc = int'(cnt_accept); c0_rej = int'(cnt_reject);
    has_guard = int'(ae + 1 < 1024 / gof(p));
    for (int c = 0; c < NC; c++) begin
      seed[c] = $urandom & wmask(p);
      write_slot(c, p, as, seed[c]);
      guard[c] = $urandom & wmask(p);
      if (has_guard != 0) write_slot(c, p, ae + 1, guard[c]);
    end
    @(negedge clk);
    prec = prec_e'(p); a_start = 10'(as); a_end = 10'(ae); start = 1;
    @(negedge clk);
    start = 0;
    ncalc = 0; cyc = 1;
    while (!done) begin
      if (obs_calc) begin
        rec_u[as + 1 + ncalc] = obs_u;
        for (int c = 0; c < NC; c++) begin
          rec_xnew[c][as + 1 + ncalc] = obs_x_new[c];
          rec_acc[c][as + 1 + ncalc]  = obs_accept[c];
        end
        u_sum += longint'(obs_u); u_n++;
        for (int j = 0; j < 8; j++) u_bit_ones[j] += int'(obs_u[j]);
        ncalc++;
      end
      `CHECK(!err, ("copy error flag"))
      @(negedge clk);
      cyc++;
      if (cyc > 200000) break;
    end
    `CHECK(cyc == expected_cycles(p, as, ae) + 1, ("p%0d %0d..%0d took %0d cycles, schedule %0d", p, as, ae, cyc, expected_cycles(p, as, ae) + 1))
    @(negedge clk);
    if (obs_calc) begin   // last check of the run
      rec_u[as + 1 + ncalc] = obs_u;
      for (int c = 0; c < NC; c++) begin
        rec_xnew[c][as + 1 + ncalc] = obs_x_new[c];
        rec_acc[c][as + 1 + ncalc]  = obs_accept[c];
      end
      ncalc++;
    end
    `CHECK(ncalc == ae - as, ("%0d checks recorded, expected %0d", ncalc, ae - as))
    `CHECK(!busy, ("still busy"))
    s_acc = 0; s_rej = 0;
    for (int c = 0; c < NC; c++) begin
      for (int a = as; a <= ae; a++) read_slot(c, p, a, memv[a]);
      if (c == 0) begin
        ham_sum += $countones((memv[as] ^ seed[c]) & wmask(p)); ham_bits += 4 * gof(p);
      end
      for (int a = as + 1; a <= ae; a++) begin
        prev = memv[a - 1];
        xn   = rec_xnew[c][a] & wmask(p);
        acc  = (longint'(rec_u[a]) * longint'(pdf_ref[tidx(prev, p)])) < (longint'(pdf_ref[tidx(xn, p)]) * 256);
        `CHECK(rec_acc[c][a] == acc, ("c%0d A%0d decision %b exp %b", c, a, rec_acc[c][a], acc))
        `CHECK(memv[a] == (acc ? xn : prev), ("c%0d A%0d stored %h exp %h (prev %h cand %h)", c, a, memv[a], acc ? xn : prev, prev, xn))
        ham_sum += $countones((xn ^ prev) & wmask(p)); ham_bits += 4 * gof(p);
        if (acc) s_acc++; else s_rej++;
      end
      nz = 0;
      for (int a = as; a <= ae; a++) begin
        if (nz) `CHECK(pdf_ref[tidx(memv[a], p)] != 0, ("c%0d A%0d moved to a zero-density state %h", c, a, memv[a]))
        if (pdf_ref[tidx(memv[a], p)] != 0) nz = 1;
        if (a >= as + burn_in) begin
          hist[bin_of(tidx(memv[a], p), p)]++;
          hist_n++;
        end
      end
      if (has_guard != 0) begin
        read_slot(c, p, ae + 1, v);
        `CHECK(v == guard[c], ("c%0d slot after a_end changed: %h exp %h", c, v, guard[c]))
      end
    end
    `CHECK(int'(cnt_accept) - c0_acc == s_acc && int'(cnt_reject) - c0_rej == s_rej,
           ("counters %0d/%0d exp %0d/%0d", int'(cnt_accept) - c0_acc, int'(cnt_reject) - c0_rej, s_acc, s_rej))
    tot_accept += s_acc; tot_reject += s_rej;
    ev_prec[p]++;
    $display("run p%0d %0d..%0d: %0d cycles, %0d accepted, %0d rejected", p, as, ae, cyc, s_acc, s_rej);
  endtask

  task automatic mem_test(int n);
    int c, r, g;
    logic [3:0] d, q;
    for (int i = 0; i < n; i++) begin
      c = $urandom_range(NC - 1); r = $urandom_range(63); g = $urandom_range(15); d = 4'($urandom);
      host_write(c, r, g, d);
      host_read(c, r, g, q);
      `CHECK(q == d, ("memory mode c%0d r%0d g%0d read %h wrote %h", c, r, g, q, d))
    end
  endtask

  task automatic cfg_err_test();
    @(negedge clk);
    prec = PREC_16; a_start = 10'd3; a_end = 10'd256; start = 1;
    #1 `CHECK(cfg_err, ("out-of-range a_end not flagged"))
    if (cfg_err) ev_cfg_err++;
    @(negedge clk);
    start = 0;
    `CHECK(!busy, ("started with invalid range"))
  endtask

  task automatic init_tb();
    host_idle(); start = 0; prec = PREC_4; a_start = 0; a_end = 0;
    mem_comp = '0; mem_row = 0; mem_grp = 0; mem_wdata = 0; pdf_addr = 0; pdf_wdata = 0;
    ham_sum = 0; ham_bits = 0; ev_mem_w = 0; ev_mem_r = 0; ev_cfg_err = 0;
    tot_accept = 0; tot_reject = 0; u_sum = 0; u_n = 0;
    foreach (u_bit_ones[j]) u_bit_ones[j] = 0;
    foreach (hist[b]) hist[b] = 0;
    hist_n = 0; burn_in = 32; bin_mode = 0;
    foreach (ev_prec[i]) ev_prec[i] = 0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
  endtask

  // Total variation distance between the binned samples and the density
  // programmed for precision p; clears the histogram.
  task automatic dist_check(int p, real tol);
    real tgt [16];
    real tot, tv;
    tot = 0.0;
    foreach (tgt[b]) tgt[b] = 0.0;
    for (int i = 0; i < ((p == 0) ? 16 : 256); i++) begin
      tgt[bin_of(8'(i), p)] += real'(pdf_ref[i]);
      tot += real'(pdf_ref[i]);
    end
    tv = 0.0;
    for (int b = 0; b < 16; b++) begin
      real h;
      h = (hist_n > 0) ? real'(hist[b]) / real'(hist_n) : 0.0;
      tv += 0.5 * ((h > tgt[b] / tot) ? (h - tgt[b] / tot) : (tgt[b] / tot - h));
      $display("  bin %2d: samples %6.4f target %6.4f", b, h, tgt[b] / tot);
    end
    `CHECK(hist_n > 1000 && tv < tol, ("p%0d: %0d samples, total variation %0.4f, limit %0.4f", p, hist_n, tv, tol))
    $display("distribution p%0d: %0d samples, total variation distance %0.4f (limit %0.4f)", p, hist_n, tv, tol);
    foreach (hist[b]) hist[b] = 0;
    hist_n = 0;
  endtask

  task automatic final_report();
    `CHECK(ham_bits > 0 && ham_sum * 100 > ham_bits * 38 && ham_sum * 100 < ham_bits * 52,
           ("candidates differ in %0d of %0d bits, expected about 45%%", ham_sum, ham_bits))
    // u must look uniform: mean near 127.5 and every bit 1 in 30..70% of checks
    `CHECK(u_n > 20 && u_sum * 100 > u_n * 10000 && u_sum * 100 < u_n * 15500, ("mean of u %0d/%0d", u_sum, u_n))
    for (int j = 0; j < 8; j++)
      `CHECK(u_bit_ones[j] * 10 > int'(u_n) * 3 && u_bit_ones[j] * 10 < int'(u_n) * 7, ("u bit %0d one in %0d of %0d", j, u_bit_ones[j], u_n))
    `CHECK(tot_accept > 0, ("no sample was accepted"))
    `CHECK(tot_reject > 0, ("no sample was rejected"))
    `CHECK(cnt_random > 0, ("no pseudo-read"))
    `CHECK(cnt_rest_copy > 0, ("no restore by in-memory copy"))
    `CHECK(cnt_rest_write > 0, ("no restore by write-back"))
    `CHECK(cnt_fwd_copy > 0, ("no forward in-memory copy"))
    `CHECK(cnt_fwd_write > 0, ("no forward write-back"))
    `CHECK(ev_mem_w > 0 && ev_mem_r > 0, ("memory mode not used"))
    `CHECK(ev_cfg_err > 0, ("no rejected configuration"))
    for (int i = 0; i < 4; i++) `CHECK(ev_prec[i] > 0, ("precision %0d never run", i))
    $display("mechanisms: accepted %0d rejected %0d pseudo-reads %0d restore-copy %0d restore-write %0d fwd-copy %0d fwd-write %0d mem-writes %0d mem-reads %0d cfg-errors %0d precisions %0d/%0d/%0d/%0d flipped-bits %0d/%0d",
             tot_accept, tot_reject, cnt_random, cnt_rest_copy, cnt_rest_write, cnt_fwd_copy, cnt_fwd_write,
             ev_mem_w, ev_mem_r, ev_cfg_err, ev_prec[0], ev_prec[1], ev_prec[2], ev_prec[3], ham_sum, ham_bits);
  endtask
