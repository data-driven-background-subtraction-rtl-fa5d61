// tb_bsu: self-checking testbench of the background subtraction unit.
//
// A floating-point reference of the online algorithm (closest component by
// Mahalanobis distance, eps* search with the Gaussian CDF difference obtained
// by Simpson integration of the density, fit decision, follow-the-leader
// update or new-component creation with pruning, Bayes classification) is run
// on the same inputs and compared with the unit's fixed-point outputs.
// Cases whose fit decision or eps* lies within a few percent of a tie are
// compared only where the tie does not matter. Directed cases cover a
// matching sample, a far outlier, an empty model and a full model. The cycle
// count of every pixel is checked against the bound of the header of bsu.
module tb_bsu;
  import bsps_pkg::*;

  localparam int N = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mfx_t        cfg_p_bg;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [7:0]  in_x;
  gmm_t        in_model;
  bsu_result_t out_res;

  int checks = 0, failures = 0;
  int n_fit = 0, n_new = 0, n_fg = 0, n_bg = 0;

  bsu #(.N_HIST(N), .EPS_MAX(64)) dut (.*);

  // ---------------- reference model ----------------
  real rw[K_MAX], rmu[K_MAX], rv[K_MAX];
  bit  rvalid[K_MAX];
  real r_post;
  bit  r_fg, r_new, r_tie, r_eps_tie;
  int  r_eps;
  string dbg;   // reference decision details for failure messages

  function automatic real gpdf(real x, real m, real v);
    return $exp(-(x - m) * (x - m) / (2.0 * v)) / $sqrt(2.0 * 3.14159265358979 * v);
  endfunction

  function automatic real gmass(real lo, real hi, real m, real v);
    real h, s;
    int  n2 = 400;
    h = (hi - lo) / n2;
    s = gpdf(lo, m, v) + gpdf(hi, m, v);
    for (int i = 1; i < n2; i++) s += ((i % 2) ? 4.0 : 2.0) * gpdf(lo + i * h, m, v);
    return s * h / 3.0;
  endfunction

  task automatic ref_run(input real x, input real pbg);
    real pxbg, best, pc, q, qb, peps, wn, d, sum, ws;
    int  c, slot;
    bit  any;
    pxbg = 0; best = 1e30; c = 0; any = 0;
    for (int k = 0; k < K_MAX; k++) if (rvalid[k]) begin
      if (rv[k] < 0.25) rv[k] = 0.25;
      pxbg += rw[k] * gpdf(x, rmu[k], rv[k]);
      if ((x - rmu[k]) * (x - rmu[k]) / rv[k] < best) begin
        best = (x - rmu[k]) * (x - rmu[k]) / rv[k]; c = k; any = 1;
      end
    end
    r_post = pxbg * pbg / (pxbg + 1.0 / 256.0);
    r_fg   = r_post < 0.5;
    r_eps  = 1; r_tie = 0; r_eps_tie = 0;
    if (any) begin
      qb = gmass(x - 1, x + 1, rmu[c], rv[c]) / 2.0;
      for (int e = 2; e <= 64; e++) begin
        q = gmass(x - e, x + e, rmu[c], rv[c]) / (2.0 * e);
        if (q > qb * 0.995 && q < qb * 1.005) r_eps_tie = 1;
        if (q > qb) begin qb = q; r_eps = e; end
        else break;
      end
      pc   = gpdf(x, rmu[c], rv[c]);
      peps = rw[c] * qb;
      r_tie = ((pc > peps * 0.95) && (pc < peps * 1.05)) || (pc < 1e-8);
      r_new = !(pc >= peps);
      dbg = $sformatf("c=%0d pc=%g peps=%g eps=%0d mu=%g v=%g w=%g", c, pc, peps, r_eps, rmu[c], rv[c], rw[c]);
    end else begin
      r_new = 1;
    end
    if (!r_new) begin
      for (int k = 0; k < K_MAX; k++) if (rvalid[k]) begin
        if (k == c) begin
          rw[k] = rw[k] + (1.0 - rw[k]) / N;
          wn = rw[k] * N;
          d  = x - rmu[k];
          rmu[k] = rmu[k] + d / (wn + 1);
          rv[k]  = rv[k] + wn * d * d / ((wn + 1) * (wn + 1)) - rv[k] / (wn + 1);
          if (rv[k] < 0.25) rv[k] = 0.25;
        end else rw[k] = rw[k] - rw[k] / N;
      end
    end else begin
      slot = -1;
      for (int k = K_MAX - 1; k >= 0; k--) if (!rvalid[k]) slot = k;
      if (slot < 0) begin
        slot = 0;
        for (int k = 0; k < K_MAX; k++) if (rw[k] < rw[slot]) slot = k;
      end
      sum = 0;
      for (int k = 0; k < K_MAX; k++) if (rvalid[k] && k != slot) sum += rw[k];
      for (int k = 0; k < K_MAX; k++)
        if (rvalid[k] && k != slot && sum > 0) rw[k] = rw[k] * (N - 1.0) / N / sum;
      rvalid[slot] = 1; rw[slot] = 1.0 / N; rmu[slot] = x;
      rv[slot] = ((2.0 * r_eps) * (2.0 * r_eps) - 1.0) / 12.0;
      ws = 0;
      for (int k = 0; k < K_MAX; k++) if (rvalid[k]) begin
        if (k != slot && rw[k] < 1.0 / N) rvalid[k] = 0;
        else ws += rw[k];
      end
      for (int k = 0; k < K_MAX; k++) if (rvalid[k]) rw[k] = rw[k] / ws;
    end
  endtask

  function automatic real q16(mfx_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic mfx_t to_q16(real v);
    return mfx_t'($rtoi(v * 65536.0));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // run one pixel through the DUT and the reference, compare
  task automatic run_pixel(input int x, input real pbg);
    int cyc;
    real e;
    in_x = 8'(x);
    for (int k = 0; k < K_MAX; k++) begin
      in_model[k].valid  = rvalid[k];
      in_model[k].w      = rvalid[k] ? to_q16(rw[k]) : '0;
      in_model[k].mu     = rvalid[k] ? to_q16(rmu[k]) : '0;
      in_model[k].sigma2 = rvalid[k] ? to_q16(rv[k]) : '0;
      // the reference starts from the quantised model the DUT sees
      rw[k]  = q16(in_model[k].w);
      rmu[k] = q16(in_model[k].mu);
      rv[k]  = q16(in_model[k].sigma2);
    end
    cfg_p_bg = to_q16(pbg);
    in_valid = 1;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 0;
    cyc = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    ref_run(real'(x), pbg);
    check(cyc <= 2 * K_MAX + 64 + 8, $sformatf("cycle count %0d", cyc));
    if (r_post > 0.55 || r_post < 0.45)
      check(out_res.fg == r_fg, $sformatf("x=%0d fg dut=%0d ref=%0d", x, out_res.fg, r_fg));
    check((q16(out_res.p_bg) - r_post < 0.02) && (r_post - q16(out_res.p_bg) < 0.02),
          $sformatf("x=%0d p_bg dut=%f ref=%f", x, q16(out_res.p_bg), r_post));
    if (!r_tie) begin
      check(out_res.new_comp == r_new,
            $sformatf("x=%0d new_comp dut=%0d ref=%0d (reference: %s)", x, out_res.new_comp, r_new, dbg));
      if (out_res.new_comp == r_new) begin
        for (int k = 0; k < K_MAX; k++) begin
          check(out_res.model[k].valid == rvalid[k], $sformatf("x=%0d valid[%0d]", x, k));
          if (rvalid[k] && out_res.model[k].valid) begin
            e = q16(out_res.model[k].w) - rw[k];
            check(e < 0.003 && e > -0.003,
                  $sformatf("x=%0d w[%0d] dut=%f ref=%f", x, k, q16(out_res.model[k].w), rw[k]));
            e = q16(out_res.model[k].mu) - rmu[k];
            check(e < 0.05 && e > -0.05,
                  $sformatf("x=%0d mu[%0d] dut=%f ref=%f", x, k, q16(out_res.model[k].mu), rmu[k]));
            if (!(r_new && r_eps_tie)) begin
              e = (q16(out_res.model[k].sigma2) - rv[k]) / rv[k];
              check(e < 0.01 && e > -0.01,
                    $sformatf("x=%0d var[%0d] dut=%f ref=%f", x, k,
                              q16(out_res.model[k].sigma2), rv[k]));
            end
          end
        end
      end
    end
    if (out_res.new_comp) n_new++; else n_fit++;
    if (out_res.fg) n_fg++; else n_bg++;
    // continue from the DUT's model so that the sequence stays in step
    for (int k = 0; k < K_MAX; k++) begin
      rvalid[k] = out_res.model[k].valid;
      rw[k]  = q16(out_res.model[k].w);
      rmu[k] = q16(out_res.model[k].mu);
      rv[k]  = q16(out_res.model[k].sigma2);
    end
    @(posedge clk);
  endtask

  task automatic set_model(input int n, input real m0, input real m1, input real m2);
    for (int k = 0; k < K_MAX; k++) rvalid[k] = 0;
    for (int k = 0; k < n; k++) begin
      rvalid[k] = 1;
      rw[k] = 1.0 / n;
      rmu[k] = (k == 0) ? m0 : (k == 1) ? m1 : m2;
      rv[k] = 2.25 + k;
    end
  endtask

  initial begin
    // watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x;
    in_valid = 0; out_ready = 1; in_x = 0; in_model = '0; cfg_p_bg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // directed: sample on top of a component fits and is background
    set_model(2, 16.0, 50.0, 0.0);
    run_pixel(16, 0.6);
    check(out_res.new_comp == 0 && out_res.fg == 0, "matching sample fits, background");
    // directed: far outlier creates a new component and is foreground
    set_model(2, 16.0, 50.0, 0.0);
    run_pixel(120, 0.6);
    check(out_res.new_comp == 1 && out_res.fg == 1, "outlier creates component, foreground");
    // directed: empty model
    set_model(0, 0.0, 0.0, 0.0);
    run_pixel(77, 0.6);
    check(out_res.new_comp == 1 && out_res.model[0].valid, "empty model gets a component");
    // directed: full model, new component replaces the lightest
    for (int k = 0; k < K_MAX; k++) begin
      rvalid[k] = 1; rw[k] = (k == 3) ? 0.02 : 0.98 / (K_MAX - 1);
      rmu[k] = 20.0 * k; rv[k] = 1.0;
    end
    run_pixel(250, 0.6);
    check(out_res.new_comp == 1 && q16(out_res.model[3].mu) > 249.0,
          "full model: lightest slot replaced");

    // random sequences
    for (int s = 0; s < 12; s++) begin
      set_model(1 + s % 3, 10.0 + $urandom_range(0, 60), 90.0 + $urandom_range(0, 60),
                170.0 + $urandom_range(0, 60));
      for (int i = 0; i < 25; i++) begin
        if ($urandom_range(0, 3) == 0) x = $urandom_range(0, 255);
        else x = int'(rmu[0]) + $urandom_range(0, 6) - 3;
        if (x < 0) x = 0;
        if (x > 255) x = 255;
        run_pixel(x, 0.55 + 0.05 * (s % 3));
      end
    end

    check(n_fit > 0 && n_new > 0 && n_fg > 0 && n_bg > 0, "all outcomes exercised");
    $display("fit=%0d new=%0d fg=%0d bg=%0d", n_fit, n_new, n_fg, n_bg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
