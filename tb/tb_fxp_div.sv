// tb_fxp_div -- streams random and corner-case divisions through the
// pipelined divider one per cycle and checks each quotient, its tag and the
// fixed latency of WL+FL+2 cycles.
module tb_fxp_div;
  import fxp_pkg::*;
  import lsmr_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  fixed_t a, b, q;
  logic [15:0] in_tag, out_tag;
  fxp_div #(.TAG_W(16)) dut (.clk, .rst_n, .in_valid, .a, .b, .in_tag, .out_valid, .q, .out_tag);

  localparam int N = 600;
  localparam int LAT = WL + FL + 2;
  int ea[N], eb[N], tin[N];
  int cyc = 0, got = 0;

  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int k;
    k = int'(out_tag);
    check(q == div(ea[k], eb[k]), $sformatf("%0d / %0d = %0d, expected %0d", ea[k], eb[k], q, div(ea[k], eb[k])));
    check(cyc - tin[k] == LAT, $sformatf("latency %0d", cyc - tin[k]));
    got++;
  end

  initial begin
    in_valid = 0; a = 0; b = 0; in_tag = 0;
    for (int k = 0; k < N; k++) begin
      ea[k] = $urandom; eb[k] = $urandom;
      case (k % 6)
        0: eb[k] = eb[k] >>> 10;
        1: begin ea[k] = ea[k] >>> 8; eb[k] = eb[k] >>> 20; end
        2: eb[k] = 0;
        3: begin ea[k] = 32'sh8000_0000; eb[k] = (k % 12 == 3) ? -1 : 1 <<< 18; end
        default: ;
      endcase
    end
    ea[0] = 3 <<< 18; eb[0] = 2 <<< 18;   // 3 / 2 = 1.5
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      in_valid = 1; a = ea[k]; b = eb[k]; in_tag = 16'(k); tin[k] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    check(got == N, $sformatf("%0d results of %0d", got, N));
    check(div(3 <<< 18, 2 <<< 18) == (3 <<< 17), "reference 3/2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
