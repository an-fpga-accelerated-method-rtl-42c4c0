// tb_local_ram -- writes a pattern through the write port and reads it back
// on both read ports in the same cycles, including read-during-write
// (old data before the edge, new data after).
module tb_local_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 64;
  logic we;
  logic [5:0] waddr, raddr0, raddr1;
  logic [31:0] wdata, rdata0, rdata1;
  logic [31:0] model [D];
  local_ram #(.WIDTH(32), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr0, .rdata0, .raddr1, .rdata1);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr0 = 0; raddr1 = 0;
    for (int k = 0; k < D; k++) begin
      @(negedge clk) begin we = 1; waddr = 6'(k); wdata = $urandom; model[k] = wdata; end
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < D; k++) begin
      @(negedge clk) begin raddr0 = 6'(k); raddr1 = 6'(D - 1 - k); end
      #1 check(rdata0 == model[k] && rdata1 == model[D-1-k], $sformatf("read %0d", k));
    end
    for (int k = 0; k < 200; k++) begin
      @(negedge clk) begin
        we = 1; waddr = 6'($urandom); wdata = $urandom;
        raddr0 = waddr; raddr1 = 6'($urandom);
      end
      #1 check(rdata0 == model[raddr0] && rdata1 == model[raddr1], "read before write edge");
      @(posedge clk) model[waddr] = wdata;
      #1 check(rdata0 == wdata, "read after write edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
