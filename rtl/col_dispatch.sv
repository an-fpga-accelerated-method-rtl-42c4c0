// col_dispatch -- splits one LSMR call over a pair of compute units.
//
// The columns of B are independent LSMR problems, so one call (one
// weight_update or activation_update solve) is shared by two compute units:
// the first solves columns 0 .. ceil(p/2)-1, the second the remaining
// floor(p/2), each with its own internal buffer for A^T, both reading the
// same input buffer and writing disjoint columns of the same output buffer.
// The halving by column offset follows the published design, where host
// software issues the two kernel launches; doing it with this small
// sequencer, and giving the odd column to the first unit, are this design's
// choices.  A unit given no columns (p = 1) is not started.  The first
// unit's offset field is always zero; it is kept so that both units take
// the same argument struct.
//
// Timing: pulse start with job while busy is low; both units start on the
// next cycle; done pulses one cycle after the later of the two finishes.
module col_dispatch
  import lsmr_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  job_t          job,
  output logic          busy,
  output logic          done,
  output logic [1:0]    cu_start,
  output cu_args_t      cu_args [2],
  input  logic [1:0]    cu_done
);
  logic [1:0]       pending;
  logic [DIM_W-1:0] p0, p1;

  always_comb begin
    p0 = (job.p + 1) >> 1;
    p1 = job.p - p0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending  <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      cu_start <= '0;
      cu_args[0] <= '0;
      cu_args[1] <= '0;
    end else begin
      done     <= 1'b0;
      cu_start <= '0;
      if (!busy) begin
        if (start) begin
          cu_args[0] <= '{m: job.m, n: job.n, p: p0, offset: '0,
                          base_input: job.base_input, base_at: job.base_at0,
                          base_output: job.base_output};
          cu_args[1] <= '{m: job.m, n: job.n, p: p1, offset: p0,
                          base_input: job.base_input, base_at: job.base_at1,
                          base_output: job.base_output};
          cu_start   <= {p1 != '0, p0 != '0};
          pending    <= {p1 != '0, p0 != '0};
          busy       <= (job.p != '0);
          done       <= (job.p == '0);
        end
      end else begin
        if ((pending & ~cu_done) == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        pending <= pending & ~cu_done;
      end
    end
  end
endmodule
