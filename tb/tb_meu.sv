// tb_meu: self-checking testbench of the model estimation unit.
//
// Feeds pixel histories of N = 100 samples drawn from known Gaussian
// mixtures (Box-Muller on $urandom, rounded to integer intensities) and
// checks that the fitted mixture recovers them at cluster level: the
// components near each true mean together carry its share of the data
// (within 0.15) with a weighted mean within 1 level, no weight sits away
// from the true modes, weights sum to one and variances are positive and
// not wider than the true spread. A true mode may be covered by several
// fitted components (the variational fit does not always merge them within
// EM_ITERS passes). When more than K_MAX components survive, only the
// K_MAX heaviest are output and renormalised, which can shift a mode's
// share by about 0.13; the weight tolerance allows for that. Cases: the
// two-Gaussian toy set (means 16 and 50, deviations 1.5 and 2.0), three
// well-separated Gaussians, and a single Gaussian. Each estimation must end
// within the cycle budget of the header of meu.
module tb_meu;
  import bsps_pkg::*;

  localparam int N = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       hist_valid, hist_ready, out_valid, out_ready, busy;
  logic [7:0] hist_x;
  gmm_t       out_model;
  logic [$clog2(K_MAX+1)-1:0] out_ncomp;

  int checks = 0, failures = 0;

  meu #(.N_HIST(N), .K_INIT(50), .KM_ITERS(4), .EM_ITERS(10)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real q16(mfx_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  task automatic run_case(input int nc, input real m[3], input real s[3], input int cnt[3]);
    int   xs[N];
    int   idx, cyc, v;
    real  wsum, wtrue, err, covered;
    // samples, grouped by generating component
    idx = 0;
    for (int c = 0; c < nc; c++)
      for (int i = 0; i < cnt[c]; i++) begin
        v = $rtoi(m[c] + s[c] * gauss() + 0.5);
        xs[idx++] = (v < 0) ? 0 : (v > 255) ? 255 : v;
      end
    // shuffle into time order
    for (int i = N - 1; i > 0; i--) begin
      int r = $urandom_range(0, i);
      int t = xs[i]; xs[i] = xs[r]; xs[r] = t;
    end
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      hist_x = 8'(xs[i]);
      hist_valid = 1;
      while (!hist_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
    end
    hist_valid = 0;
    cyc = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    $display("case %0d gaussians: %0d components, %0d cycles", nc, out_ncomp, cyc);
    for (int k = 0; k < K_MAX; k++)
      if (out_model[k].valid)
        $display("  w=%f mu=%f var=%f", q16(out_model[k].w), q16(out_model[k].mu),
                 q16(out_model[k].sigma2));
    check(cyc < 400000, $sformatf("cycle count %0d", cyc));
    wsum = 0;
    for (int k = 0; k < K_MAX; k++) if (out_model[k].valid) begin
      wsum += q16(out_model[k].w);
      check(out_model[k].sigma2 > 0, "positive variance");
    end
    check(wsum > 0.99 && wsum < 1.01, $sformatf("weights sum %f", wsum));
    check(out_ncomp >= nc && out_ncomp <= K_MAX, $sformatf("component count %0d", out_ncomp));
    // cluster-level view: the fitted components lying within 3 deviations
    // (+1 level) of a true mean together carry that mean's share of the
    // data and have a weighted mean close to it
    covered = 0;
    for (int c = 0; c < nc; c++) begin
      real gw, gm, r;
      gw = 0; gm = 0;
      wtrue = real'(cnt[c]) / N;
      r = 3.0 * s[c] + 1.0;
      for (int k = 0; k < K_MAX; k++) if (out_model[k].valid) begin
        err = q16(out_model[k].mu) - m[c];
        if (err < r && err > -r) begin
          gw += q16(out_model[k].w);
          gm += q16(out_model[k].w) * q16(out_model[k].mu);
          check(q16(out_model[k].sigma2) < 4.0 * s[c] * s[c] + 1.0,
                $sformatf("variance near mean %f: %f", m[c], q16(out_model[k].sigma2)));
        end
      end
      check(gw > 0, $sformatf("component near mean %f", m[c]));
      if (gw > 0) gm = gm / gw;
      err = gw - wtrue;
      check(err < 0.15 && err > -0.15, $sformatf("weight near mean %f: %f vs %f", m[c], gw, wtrue));
      err = gm - m[c];
      check(err < 1.0 && err > -1.0, $sformatf("weighted mean near %f: %f", m[c], gm));
      covered += gw;
    end
    check(covered > 0.95, $sformatf("weight covered by true modes %f", covered));
    out_ready = 1;
    @(posedge clk);
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hist_valid = 0; hist_x = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_case(2, '{16.0, 50.0, 0.0}, '{1.5, 2.0, 1.0}, '{60, 40, 0});
    run_case(3, '{40.0, 120.0, 200.0}, '{2.0, 3.0, 2.5}, '{30, 45, 25});
    run_case(1, '{90.0, 0.0, 0.0}, '{2.5, 1.0, 1.0}, '{100, 0, 0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
