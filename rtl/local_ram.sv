// local_ram -- on-chip vector memory of a compute unit (u, v, h or hbar).
//
// DEPTH words of WIDTH bits, one synchronous write port and two
// combinational read ports, so a fused loop can read two elements and write
// one in the same cycle.  The four local vectors follow the published
// kernel; ports, depth and read timing are this design's choices.  Contents
// are not reset: every word is written before it is read by the unit.
module local_ram #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 4096,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr0,
  output logic [WIDTH-1:0] rdata0,
  input  logic [AW-1:0]    raddr1,
  output logic [WIDTH-1:0] rdata1
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata0 = mem[raddr0];
  assign rdata1 = mem[raddr1];
endmodule
