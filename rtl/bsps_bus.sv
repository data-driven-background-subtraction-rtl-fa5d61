// bsps_bus: shared bus between the external-memory stream and the M BSU
// cores of the background subtraction parallel system.
//
// Function: distributes pixel jobs (intensity plus stored model) to the M
// cores and gathers their results (updated model plus foreground decision)
// back into one stream in the original pixel order, so that the write-back
// address sequence equals the read address sequence.
//
// How it works: pixels are dealt round-robin, pixel i goes to core i mod M.
// A dispatch pointer names the core that receives the next job; it moves on
// only when that core's input FIFO accepts the job, so a full FIFO stalls
// the whole input stream (back-pressure toward memory). A collect pointer
// names the core whose result is due next; the collector forwards that
// core's result when it is valid and the downstream side is ready, then
// moves on. Because every core keeps its own jobs in order, the output is in
// pixel order. Each pointer moves at most once per cycle, so the bus passes
// at most one job and one result per clock cycle.
//
// Interface: valid/ready handshakes on every side. in_* is the job stream
// from memory, core_* drives the M core input FIFOs, res_* returns the M
// core results, out_* is the result stream toward memory. stall is high in
// a cycle where a job is offered but the addressed core cannot accept it.
//
// core_job carries the offered job to every FIFO at once (a broadcast
// bus); only the addressed core sees core_valid, so the job data outputs
// are the job input by design.
//
// Timing: purely combinational data paths; one job and one result can move
// in the same cycle. The paper states that the cores share one bus to the
// DRAM and each core has a FIFO; the round-robin order, in-order collection
// and the one-transfer-per-cycle bus width are this design's own choices.
module bsps_bus
  import bsps_pkg::*;
#(
  parameter int M_CORES = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // job stream from external memory
  input  logic                      in_valid,
  output logic                      in_ready,
  input  job_t                      in_job,
  // toward the core input FIFOs
  output logic        [M_CORES-1:0] core_valid,
  input  logic        [M_CORES-1:0] core_ready,
  output job_t                      core_job,
  // results from the cores
  input  logic        [M_CORES-1:0] res_valid,
  output logic        [M_CORES-1:0] res_ready,
  input  bsu_result_t               res_data [M_CORES],
  // result stream toward external memory
  output logic                      out_valid,
  input  logic                      out_ready,
  output bsu_result_t               out_res,
  output logic                      stall
);

  localparam int PW = (M_CORES > 1) ? $clog2(M_CORES) : 1;

  logic [PW-1:0] disp_ptr, coll_ptr;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (int'(p) == M_CORES - 1) ? '0 : p + 1'b1;
  endfunction

  // dispatch
  always_comb begin
    core_valid = '0;
    core_valid[disp_ptr] = in_valid;
  end
  assign core_job = in_job;
  assign in_ready = core_ready[disp_ptr];
  assign stall    = in_valid && !core_ready[disp_ptr];

  // in-order collection
  always_comb begin
    res_ready = '0;
    res_ready[coll_ptr] = out_ready;
  end
  assign out_valid = res_valid[coll_ptr];
  assign out_res   = res_data[coll_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_ptr <= '0;
      coll_ptr <= '0;
    end else begin
      if (in_valid && in_ready)   disp_ptr <= next_ptr(disp_ptr);
      if (out_valid && out_ready) coll_ptr <= next_ptr(coll_ptr);
    end
  end

  // the pointers always address an existing core
  a_disp_range: assert property (@(posedge clk) disable iff (!rst_n) int'(disp_ptr) < M_CORES);
  a_coll_range: assert property (@(posedge clk) disable iff (!rst_n) int'(coll_ptr) < M_CORES);

endmodule
