// lsmr_pkg -- launch arguments shared by the LSMR compute units, the column
// dispatcher and the accelerator top.
//
// An LSMR call solves X = A^-1 B column by column, with A (m x n) and
// B (m x p) in the input buffer and X (n x p) in the output buffer, all in
// global (off-chip) memory addressed in 32-bit words.  Layout, chosen here
// where the published design only says that A and B share one input buffer
// and that B is uploaded column-wise:
//   input buffer  : A row-major at base_input, then B column-major at
//                   base_input + m*n  (B[i][c] at base_input + m*n + c*m + i)
//   internal buf. : A^T row-major (n x m) at base_at, written by the unit
//   output buffer : X column-major (X[j][c] at base_output + c*n + j),
//                   zeroed by the host before the call
// A compute unit handles columns offset .. offset+p-1.
package lsmr_pkg;
  localparam int DIM_W = 16;   // width of m, n, p, offset
  localparam int AW    = 32;   // global word address width

  typedef struct packed {
    logic [DIM_W-1:0] m;
    logic [DIM_W-1:0] n;
    logic [DIM_W-1:0] p;        // number of columns for this unit
    logic [DIM_W-1:0] offset;   // first column for this unit
    logic [AW-1:0]    base_input;
    logic [AW-1:0]    base_at;
    logic [AW-1:0]    base_output;
  } cu_args_t;

  // One LSMR call of the host (one lsmr_module): two internal buffers, one
  // per compute unit of the pair.
  typedef struct packed {
    logic [DIM_W-1:0] m;
    logic [DIM_W-1:0] n;
    logic [DIM_W-1:0] p;        // total columns of B
    logic [AW-1:0]    base_input;
    logic [AW-1:0]    base_at0;
    logic [AW-1:0]    base_at1;
    logic [AW-1:0]    base_output;
  } job_t;
endpackage
