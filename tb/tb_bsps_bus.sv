// tb_bsps_bus: self-checking testbench of the shared job/result bus.
//
// Four model cores sit behind the bus: each accepts jobs when a random
// ready is high, keeps them in a queue and returns them as results after a
// random delay, with a tag (the job's intensity field) identifying the
// pixel. The checks: job i reaches core i mod M; results leave the bus in
// job order even though the cores finish out of order; a job offered to a
// core that cannot take it raises stall and is held; at most one job and one
// result move per cycle; every job comes back exactly once.
module tb_bsps_bus;
  import bsps_pkg::*;

  localparam int M = 4, NJOBS = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              in_valid, in_ready, out_valid, out_ready, stall;
  job_t              in_job, core_job;
  logic [M-1:0]      core_valid, core_ready, res_valid, res_ready;
  bsu_result_t       res_data [M];
  bsu_result_t       out_res;

  bsps_bus #(.M_CORES(M)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_job, .core_valid, .core_ready, .core_job,
    .res_valid, .res_ready, .res_data, .out_valid, .out_ready, .out_res, .stall);

  int checks = 0, failures = 0;
  int cq [M][$];       // jobs held by each model core (tag)
  int delay [M];
  int sent = 0, got = 0, n_stall = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_job = '0; out_ready = 0; core_ready = '0;
    res_valid = '0;
    for (int c = 0; c < M; c++) begin res_data[c] = '0; delay[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (got < NJOBS) begin
      // drive at negedge
      in_valid = (sent < NJOBS) && ($urandom_range(0, 3) != 0);
      in_job.x = 8'(sent);
      out_ready = ($urandom_range(0, 3) != 0);
      for (int c = 0; c < M; c++) begin
        core_ready[c] = (cq[c].size() < 2) && ($urandom_range(0, 2) != 0);
        res_valid[c]  = (cq[c].size() > 0) && (delay[c] == 0);
        res_data[c]   = '0;
        if (cq[c].size() > 0) res_data[c].p_bg = mfx_t'(cq[c][0]);
      end
      #1;
      check($countones(core_valid) <= 1, "one job per cycle");
      check($countones(res_ready) <= 1, "one result per cycle");
      if (in_valid) begin
        check(core_valid == (M'(1) << (sent % M)), $sformatf("job %0d to core %0d", sent, sent % M));
        check(stall == !core_ready[sent % M], "stall flag");
        if (stall) n_stall++;
      end
      if (out_valid) check(out_res.p_bg == mfx_t'(got % 256), $sformatf("result order %0d", got));
      @(posedge clk);
      for (int c = 0; c < M; c++) begin
        if (res_valid[c] && res_ready[c]) begin
          void'(cq[c].pop_front());
          delay[c] = $urandom_range(0, 6);
        end else if (delay[c] > 0) delay[c]--;
        if (core_valid[c] && core_ready[c]) begin
          cq[c].push_back(int'(core_job.x));
          if (cq[c].size() == 1) delay[c] = $urandom_range(0, 6);
        end
      end
      if (in_valid && in_ready) sent++;
      if (out_valid && out_ready) got++;
      @(negedge clk);
    end
    check(sent == NJOBS && got == NJOBS, "all jobs returned");
    check(n_stall > 0, "stall happened");
    $display("stalls=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
