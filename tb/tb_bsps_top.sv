// tb_bsps_top: end-to-end, full-size testbench of the background
// subtraction parallel system (default parameters: four BSU cores, one
// MEU, N = 100 history, K_MAX = 8).
//
// Scene: a small thermal frame of W x H pixels. Every pixel has its own
// background level bg(i) (so a result returned for the wrong pixel is
// detected) plus +-1 level of noise. A hot object (level 220) three pixels
// wide sweeps one column per frame across the image, so each object pixel
// is new to its model when it appears.
//
// Sequence: (1) the MEU estimates the starting model of pixel 0 from a
// 100-sample history around bg(0); the result is checked and stored. The
// other pixels start with one component (w = 1, mu = bg, var = 4).
// (2) FRAMES frames are streamed through the job port at full rate while the
// result port applies random back-pressure. Each returned model is written
// back and used in the next frame.
//
// Checks: results return in pixel order (the returned model holds a
// component at that pixel's background level); object pixels on their first
// appearance create a new component and are foreground while covered;
// background pixels after the first frame are background; the weights of
// every returned model sum to one; the frame time stays within the bound
// given by M cores each spending at most BSU_CYC cycles per pixel.
// Mechanism counters (input stall, result back-pressure, new component,
// fit, foreground, background, MEU estimate) must all be non-zero.
module tb_bsps_top;
  import bsps_pkg::*;

  localparam int W = 16, H = 8, NPIX = W * H;
  localparam int FRAMES = 12;
  localparam int M = 4;
  localparam int BSU_CYC = 2 * K_MAX + 64 + 8;   // worst-case BSU cycles per pixel

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mfx_t        cfg_p_bg;
  logic        pix_valid, pix_ready, res_valid, res_ready, stall;
  job_t        pix_job;
  bsu_result_t res;
  logic        hist_valid, hist_ready, mdl_valid, mdl_ready, meu_busy;
  logic [7:0]  hist_x;
  gmm_t        mdl_model;
  logic [$clog2(K_MAX+1)-1:0] mdl_ncomp;

  bsps_top dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_bp = 0, n_new = 0, n_fit = 0, n_fg = 0, n_bg = 0, n_meu = 0;
  gmm_t mem [NPIX];
  int   xs  [NPIX];
  bit   obj [NPIX];
  bit   first [NPIX];   // object reaches this pixel in this frame

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real q16(mfx_t v);
    return real'(v) / 65536.0;
  endfunction

  function automatic int bg_level(int i);
    return 30 + 3 * (i % 50);
  endfunction

  function automatic gmm_t one_comp(int mu);
    gmm_t g;
    g = '0;
    g[0].valid  = 1;
    g[0].w      = 32'sd65536;
    g[0].mu     = mfx_t'(mu) <<< 16;
    g[0].sigma2 = 32'sd262144;
    return g;
  endfunction

  function automatic bit has_comp_near(gmm_t g, int mu, real tol);
    for (int k = 0; k < K_MAX; k++)
      if (g[k].valid && q16(g[k].mu) > mu - tol && q16(g[k].mu) < mu + tol) return 1;
    return 0;
  endfunction

  function automatic real wsum(gmm_t g);
    real s = 0;
    for (int k = 0; k < K_MAX; k++) if (g[k].valid) s += q16(g[k].w);
    return s;
  endfunction

  // (1) model estimation of pixel 0
  task automatic run_meu();
    int cyc;
    @(negedge clk);
    for (int i = 0; i < 100; i++) begin
      hist_x = 8'(bg_level(0) - 1 + $urandom_range(0, 2));
      hist_valid = 1;
      while (!hist_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
    end
    hist_valid = 0;
    cyc = 0;
    while (!mdl_valid) begin @(negedge clk); cyc++; end
    n_meu++;
    check(mdl_ncomp >= 1, "MEU returned a component");
    check(has_comp_near(mdl_model, bg_level(0), 1.5), "MEU model at the background level");
    check(wsum(mdl_model) > 0.99 && wsum(mdl_model) < 1.01, "MEU weights sum to one");
    $display("MEU: %0d components after %0d cycles", mdl_ncomp, cyc);
    mem[0] = mdl_model;
    mdl_ready = 1;
    @(posedge clk);
    @(negedge clk);
    mdl_ready = 0;
  endtask

  task automatic producer();
    for (int i = 0; i < NPIX; i++) begin
      pix_job.x     = 8'(xs[i]);
      pix_job.model = mem[i];
      pix_valid = 1;
      while (!pix_ready) begin
        n_stall += stall;
        @(negedge clk);
      end
      @(posedge clk);
      @(negedge clk);
    end
    pix_valid = 0;
  endtask

  task automatic consumer(input int f);
    int i = 0;
    while (i < NPIX) begin
      res_ready = ($urandom_range(0, 3) != 0);
      if (res_valid && !res_ready) n_bp++;
      if (res_valid && res_ready) begin
        @(posedge clk);
        check(has_comp_near(res.model, bg_level(i), 2.5),
              $sformatf("frame %0d pixel %0d: model of this pixel returned", f, i));
        check(wsum(res.model) > 0.99 && wsum(res.model) < 1.01,
              $sformatf("frame %0d pixel %0d: weights sum %f", f, i, wsum(res.model)));
        if (res.new_comp) n_new++; else n_fit++;
        if (res.fg) n_fg++; else n_bg++;
        if (obj[i]) begin
          check(res.fg, $sformatf("frame %0d pixel %0d: object is foreground", f, i));
          if (first[i])
            check(res.new_comp, $sformatf("frame %0d pixel %0d: object adds a component", f, i));
        end else if (f > 0) begin
          check(!res.fg, $sformatf("frame %0d pixel %0d: background (p=%f)", f, i, q16(res.p_bg)));
        end
        mem[i] = res.model;
        i++;
      end else begin
        @(posedge clk);
      end
      @(negedge clk);
    end
    res_ready = 0;
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, cyc;
    cfg_p_bg = 32'sd39322;   // 0.60
    pix_valid = 0; pix_job = '0; res_ready = 0;
    hist_valid = 0; hist_x = 0; mdl_ready = 0;
    for (int i = 0; i < NPIX; i++) mem[i] = one_comp(bg_level(i));
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_meu();
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < NPIX; i++) begin
        int col;
        col = i % W;
        obj[i] = (col >= f + 2) && (col < f + 5);
        first[i] = (col == f + 4);
        xs[i]  = obj[i] ? 220 : bg_level(i) - 1 + $urandom_range(0, 2);
      end
      cyc = 0;
      fork
        producer();
        consumer(f);
        begin
          while (pix_valid || res_ready || cyc == 0) begin @(negedge clk); cyc++; end
        end
      join
      check(cyc <= NPIX * BSU_CYC / M + 64,
            $sformatf("frame %0d took %0d cycles", f, cyc));
      $display("frame %0d: %0d cycles (%0.1f per pixel)", f, cyc, real'(cyc) / NPIX);
    end
    $display("stall=%0d backpressure=%0d new=%0d fit=%0d fg=%0d bg=%0d meu=%0d",
             n_stall, n_bp, n_new, n_fit, n_fg, n_bg, n_meu);
    check(n_stall > 0, "input stall happened");
    check(n_bp > 0, "result back-pressure happened");
    check(n_new > 0, "new component happened");
    check(n_fit > 0, "fit happened");
    check(n_fg > 0, "foreground happened");
    check(n_bg > 0, "background happened");
    check(n_meu > 0, "model estimation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
