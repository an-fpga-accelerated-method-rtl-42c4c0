// gmem_model -- behavioural model of the board's global (DDR) memory as
// seen by the compute units: NP read ports and NP write ports onto one
// array of 32-bit words.  Not synthesizable logic: it stands for off-chip
// memory behind the board's memory controller.
//
// A read request is granted when rd_gnt is high (every cycle, or randomly
// one cycle in STALL_PCT percent refused); the word returns LAT cycles after
// the grant, in order.  Writes take effect at the clock edge.  Testbenches
// reach the array directly (mem) to upload inputs and read results.
module gmem_model #(
  parameter int NP        = 1,
  parameter int DEPTH     = 65536,
  parameter int LAT       = 3,
  parameter int STALL_PCT = 0
) (
  input  logic              clk,
  input  logic [NP-1:0]     rd_req,
  input  logic [NP-1:0][31:0] rd_addr,
  output logic [NP-1:0]     rd_gnt,
  output logic [NP-1:0]     rd_valid,
  output logic [NP-1:0][31:0] rd_data,
  input  logic [NP-1:0]     wr_req,
  input  logic [NP-1:0][31:0] wr_addr,
  input  logic [NP-1:0][31:0] wr_data
);
  logic [31:0] mem [DEPTH];
  logic [NP-1:0]       vpipe [LAT];
  logic [NP-1:0][31:0] dpipe [LAT];
  int unsigned stalls = 0;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    foreach (vpipe[i]) vpipe[i] = '0;
    foreach (dpipe[i]) dpipe[i] = '0;
  end

  always_ff @(negedge clk) begin
    for (int k = 0; k < NP; k++) begin
      rd_gnt[k] <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NP; k++) begin
      vpipe[0][k] <= rd_req[k] && rd_gnt[k];
      dpipe[0][k] <= mem[rd_addr[k] % DEPTH];
      if (rd_req[k] && !rd_gnt[k]) stalls <= stalls + 1;
      if (wr_req[k]) mem[wr_addr[k] % DEPTH] <= wr_data[k];
    end
    for (int s = 1; s < LAT; s++) begin
      vpipe[s] <= vpipe[s-1];
      dpipe[s] <= dpipe[s-1];
    end
  end

  assign rd_valid = vpipe[LAT-1];
  assign rd_data  = dpipe[LAT-1];
endmodule
