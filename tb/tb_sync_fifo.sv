// tb_sync_fifo: self-checking testbench of the per-core input FIFO.
//
// Pushes random data with random valid and ready patterns against a
// queue reference model and checks every popped word, the order, the fill
// count, that a full FIFO refuses data and an empty one offers none, and
// that data written to an empty FIFO is visible after one clock cycle
// (first-word fall-through latency of one cycle). Runs the default depth.
module tb_sync_fifo;
  localparam int WIDTH = 8, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  sync_fifo dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];
  int n_full = 0, n_empty = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // latency: one word into an empty FIFO is offered after one cycle
    in_valid = 1; in_data = 8'hA5;
    @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 8'hA5, "fall-through after one cycle");
    out_ready = 1;
    @(posedge clk);
    @(negedge clk);
    out_ready = 0;
    check(!out_valid && count == 0, "empty again");
    // random traffic, phases biased toward filling and toward draining
    for (int n = 0; n < 4000; n++) begin
      int bias;
      bias = (n / 500) % 2;
      in_valid  = ($urandom_range(0, 3) < (bias ? 3 : 1));
      in_data   = 8'($urandom);
      out_ready = ($urandom_range(0, 3) < (bias ? 1 : 3));
      check(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      check(in_ready == (q.size() < DEPTH), "in_ready means not full");
      check(out_valid == (q.size() > 0), "out_valid means not empty");
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      if (out_valid) check(out_data == q[0], $sformatf("data %h vs %h", out_data, q[0]));
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    check(n_full > 0 && n_empty > 0, "both full and empty reached");
    $display("full=%0d empty=%0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
