// tb_coarse_counter: runs the 12-bit coarse counter through more than two full
// wraps and checks every cycle against a count of clock edges kept here, then
// checks that a synchronous reset returns it to zero.
`timescale 1ps/1ps
module tb_coarse_counter;
  logic clk = 1'b0, rst = 1'b1;
  logic [11:0] count;
  int checks = 0, failures = 0, wraps = 0;

  coarse_counter #(.COARSE_W(12)) dut (.clk(clk), .rst(rst), .count(count));

  initial forever #909 clk = ~clk;

  initial begin
    int n;
    logic [11:0] prev;
    @(posedge clk); @(posedge clk);
    #1;
    checks++; if (count != 0) begin failures++; $display("FAIL reset value"); end
    rst = 1'b0;
    n = 0;
    for (int c = 0; c < 9000; c++) begin
      prev = count;
      @(posedge clk); #1;
      n++;
      if (prev == 12'hFFF && count == 12'h000) wraps++;
      checks++;
      if (int'(count) != n % 4096) begin failures++; $display("FAIL count %0d exp %0d", count, n % 4096); end
    end
    checks++; if (wraps != 2) begin failures++; $display("FAIL wraps %0d", wraps); end
    rst = 1'b1; @(posedge clk); #1; rst = 1'b0;
    checks++; if (count != 0) begin failures++; $display("FAIL sync reset"); end
    @(posedge clk); #1;
    checks++; if (count != 1) begin failures++; $display("FAIL count after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
