// tb_bsu_adapt: background adaptation of one pixel in the BSU.
//
// Scenario: a pixel with a settled background (one component, mean 40,
// variance 4) is covered by a still, warm object of constant level 200.
// The first frame creates a new component of weight 1/N; each following
// frame fits it, raises its weight and narrows its variance, until the
// posterior p(bg|x) crosses 1/2 and the object is absorbed into the
// background. The testbench runs P_BG = 0.55, 0.60 and 0.65 and checks the
// crossing frame against a real-valued replay of the update rules (weight
// w += (1-w)/N, variance v -= v/(wN+1) for a sample at the mean, starting
// from the eps* = EPS_MAX window variance), allowing +-2 frames for
// fixed-point rounding. It also checks
// that the crossing frame falls as P_BG rises.
module tb_bsu_adapt;
  import bsps_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mfx_t        cfg_p_bg;
  logic        in_valid, in_ready, out_valid, out_ready;
  logic [7:0]  in_x;
  gmm_t        in_model;
  bsu_result_t out_res;

  bsu dut (.*);

  int checks = 0, failures = 0;
  localparam real V0 = (128.0 * 128.0 - 1.0) / 12.0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // predicted crossing frame from the follow-the-leader recursion in reals
  function automatic int predict(real pbg, real var0);
    real w = 0.01, v = var0, pdf, post;
    for (int n = 1; n < 400; n++) begin
      pdf  = w / $sqrt(2.0 * 3.14159265358979 * v);
      post = pdf * pbg / (pdf + 1.0 / 256.0);
      if (post >= 0.5) return n;
      w = w + (1.0 - w) / 100.0;
      v = v - v / (w * 100.0 + 1.0);
      if (v < 0.25) v = 0.25;
    end
    return 400;
  endfunction

  task automatic run(input real pbg, output int frame);
    gmm_t g;
    g = '0;
    g[0].valid = 1; g[0].w = 32'sd65536; g[0].mu = 40 <<< 16; g[0].sigma2 = 4 <<< 16;
    cfg_p_bg = mfx_t'($rtoi(pbg * 65536.0));
    frame = -1;
    for (int n = 0; n < 400 && frame < 0; n++) begin
      in_x = 8'd200;
      in_model = g;
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      if (n == 0) begin
        check(out_res.new_comp, "object creates a component");
        check(out_res.fg, "object starts as foreground");
      end
      if (!out_res.fg) frame = n;
      g = out_res.model;
      out_ready = 1;
      @(posedge clk);
      @(negedge clk);
      out_ready = 0;
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f55, f60, f65, p;
    in_valid = 0; in_x = 0; in_model = '0; out_ready = 0; cfg_p_bg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0.55, f55);
    run(0.60, f60);
    run(0.65, f65);
    $display("absorbed after %0d / %0d / %0d frames for p(bg) = 0.55 / 0.60 / 0.65", f55, f60, f65);
    // the object lies far in the background's tail, so the eps search runs to
    // EPS_MAX = 64 and the new component starts with var = (128^2 - 1)/12
    p = predict(0.55, V0); check(f55 >= p - 2 && f55 <= p + 2, $sformatf("0.55: %0d vs %0d", f55, p));
    p = predict(0.60, V0); check(f60 >= p - 2 && f60 <= p + 2, $sformatf("0.60: %0d vs %0d", f60, p));
    p = predict(0.65, V0); check(f65 >= p - 2 && f65 <= p + 2, $sformatf("0.65: %0d vs %0d", f65, p));
    check(f55 > f60 && f60 > f65, "higher prior absorbs sooner");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
