// lsmr_accel -- the LSMR kernel system: four compute units in two pairs.
//
// ADMM training of a feed-forward network spends almost all its time in
// two least-squares solves per layer, weight_update (A = x_{l-1}^T, one
// column per neuron) and activation_update (A = gamma I + beta W^T W, one
// column per sample).  The two are independent, so the accelerator gives
// each its own pair of LSMR compute units: job port 0 drives the pair for
// weight_update, job port 1 the pair for activation_update, and each pair
// splits its call's columns in half (col_dispatch).  All four units run at
// once.  Four units, the two-and-two assignment and the column halving
// follow the published design; the host-side parts of it (ADMM loop,
// output and multiplier updates, buffer upload and download, zeroing of X)
// stay outside and drive the job ports.
//
// Each compute unit has its own global-memory read and write port
// (index = 2*pair + unit), brought out here because the board's memory
// system is not part of this design; see lsmr_cu for the protocol.
//
// Timing: pulse job_start[k] with job[k] while job_busy[k] is low;
// job_done[k] pulses when every column of that call is in the output
// buffer.
module lsmr_accel
  import fxp_pkg::*;
  import lsmr_pkg::*;
#(
  parameter int NUM_CU = 4,
  parameter int MAX_M  = 4096,
  parameter int MAX_N  = 64,
  localparam int NUM_JOB = NUM_CU / 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_JOB-1:0]   job_start,
  input  job_t                 job [NUM_JOB],
  output logic [NUM_JOB-1:0]   job_busy,
  output logic [NUM_JOB-1:0]   job_done,
  output logic [NUM_CU-1:0]    rd_req,
  output logic [AW-1:0]        rd_addr [NUM_CU],
  input  logic [NUM_CU-1:0]    rd_gnt,
  input  logic [NUM_CU-1:0]    rd_valid,
  input  fixed_t               rd_data [NUM_CU],
  output logic [NUM_CU-1:0]    wr_req,
  output logic [AW-1:0]        wr_addr [NUM_CU],
  output fixed_t               wr_data [NUM_CU],
  output logic [NUM_CU-1:0]    cu_busy
);
  for (genvar k = 0; k < NUM_JOB; k++) begin : g_pair
    logic [1:0] cu_start, cu_done;
    cu_args_t   cu_args [2];

    col_dispatch u_disp (
      .clk, .rst_n, .start(job_start[k]), .job(job[k]),
      .busy(job_busy[k]), .done(job_done[k]),
      .cu_start, .cu_args, .cu_done);

    for (genvar u = 0; u < 2; u++) begin : g_cu
      localparam int I = 2*k + u;
      lsmr_cu #(.MAX_M(MAX_M), .MAX_N(MAX_N)) u_cu (
        .clk, .rst_n,
        .start(cu_start[u]), .args(cu_args[u]),
        .busy(cu_busy[I]), .done(cu_done[u]),
        .rd_req(rd_req[I]), .rd_addr(rd_addr[I]), .rd_gnt(rd_gnt[I]),
        .rd_valid(rd_valid[I]), .rd_data(rd_data[I]),
        .wr_req(wr_req[I]), .wr_addr(wr_addr[I]), .wr_data(wr_data[I]));
    end
  end
endmodule
