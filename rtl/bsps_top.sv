// bsps_top: background subtraction parallel system (BSPS).
//
// Function: classifies thermal-camera pixels as foreground or background
// with a per-pixel Gaussian mixture model, updates the model with every new
// frame, and (in a separate unit) estimates an initial mixture from a pixel
// history. The top level holds M_CORES background subtraction units (BSU),
// each behind its own input FIFO, one shared bus between the external
// memory stream and the cores, and one model estimation unit (MEU).
//
// How it works: the memory side delivers one job per pixel (the new 8-bit
// intensity and the stored model of that pixel). The bus deals jobs
// round-robin to the core FIFOs; each BSU takes the next job from its FIFO,
// runs the distance / fit test / update or new-component / classification
// sequence and presents the updated model with the foreground bit; the bus
// collects the results in pixel order for write-back. The MEU takes a
// history of N_HIST values of one pixel, clusters it (k-means++), runs
// variational EM and returns a mixture of at most K_MAX components, which
// the memory side stores as that pixel's starting model.
//
// Interface: pix_* job stream in, res_* result stream out (valid/ready);
// stall flags a cycle in which the input stream waits because the next core
// FIFO is full; hist_* and mdl_* are the MEU history input and model output;
// cfg_p_bg is the prior p(bg) in Q16 (0.60 in the paper's experiments).
// The external DRAM and the camera are outside this design: their role is
// taken by whatever drives pix_* / hist_* and consumes res_* / mdl_*.
//
// Timing: each BSU needs about 2*K_MAX+eps+10 cycles per pixel (see bsu);
// with M_CORES cores the system sustains about M_CORES pixels per BSU
// latency, and the bus passes at most one job and one result per cycle.
//
// Paper versus own choices: four BSU cores and one MEU, a FIFO per core and
// a shared bus follow the paper's main configuration; the FIFO depth (not
// given), fixed-point arithmetic and the handshake protocol are choices of
// this design.
module bsps_top
  import bsps_pkg::*;
#(
  parameter int M_CORES    = 4,    // BSU cores
  parameter int FIFO_DEPTH = 4,    // jobs per core input FIFO
  parameter int N_HIST     = 100,  // pixel history length N
  parameter int EPS_MAX    = 64,
  parameter int K_INIT     = 50,
  parameter int KM_ITERS   = 4,
  parameter int EM_ITERS   = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mfx_t        cfg_p_bg,
  // pixel jobs from external memory
  input  logic        pix_valid,
  output logic        pix_ready,
  input  job_t        pix_job,
  // results toward external memory
  output logic        res_valid,
  input  logic        res_ready,
  output bsu_result_t res,
  output logic        stall,
  // model estimation
  input  logic        hist_valid,
  output logic        hist_ready,
  input  logic [7:0]  hist_x,
  output logic        mdl_valid,
  input  logic        mdl_ready,
  output gmm_t        mdl_model,
  output logic [$clog2(K_MAX+1)-1:0] mdl_ncomp,
  output logic        meu_busy
);

  logic        [M_CORES-1:0] core_valid, core_ready;
  job_t                      core_job;
  logic        [M_CORES-1:0] q_valid, q_ready;
  job_t                      q_job [M_CORES];
  logic        [M_CORES-1:0] r_valid, r_ready;
  bsu_result_t               r_data [M_CORES];

  bsps_bus #(.M_CORES(M_CORES)) u_bus (
    .clk, .rst_n,
    .in_valid (pix_valid), .in_ready (pix_ready), .in_job (pix_job),
    .core_valid, .core_ready, .core_job,
    .res_valid (r_valid), .res_ready (r_ready), .res_data (r_data),
    .out_valid (res_valid), .out_ready (res_ready), .out_res (res),
    .stall
  );

  for (genvar g = 0; g < M_CORES; g++) begin : g_core
    logic [$clog2(FIFO_DEPTH+1)-1:0] fill;

    sync_fifo #(.WIDTH(JOB_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid  (core_valid[g]), .in_ready (core_ready[g]), .in_data (core_job),
      .out_valid (q_valid[g]),    .out_ready (q_ready[g]),   .out_data (q_job[g]),
      .count     (fill)
    );

    bsu #(.N_HIST(N_HIST), .EPS_MAX(EPS_MAX)) u_bsu (
      .clk, .rst_n, .cfg_p_bg,
      .in_valid  (q_valid[g]), .in_ready (q_ready[g]),
      .in_x      (q_job[g].x), .in_model (q_job[g].model),
      .out_valid (r_valid[g]), .out_ready (r_ready[g]), .out_res (r_data[g])
    );
  end

  meu #(.N_HIST(N_HIST), .K_INIT(K_INIT), .KM_ITERS(KM_ITERS), .EM_ITERS(EM_ITERS)) u_meu (
    .clk, .rst_n,
    .hist_valid, .hist_ready, .hist_x,
    .out_valid (mdl_valid), .out_ready (mdl_ready),
    .out_model (mdl_model), .out_ncomp (mdl_ncomp),
    .busy      (meu_busy)
  );

endmodule
