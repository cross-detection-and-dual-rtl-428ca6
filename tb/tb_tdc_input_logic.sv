// tb_tdc_input_logic: checks the SOP/EOP pulse generator.
//
// A 1818 ps clock (550 MHz) runs while hits arrive at random, non-integer
// picosecond times. For each hit the bench checks that TDC_IN rises at once
// (the SOP) and falls exactly at the first rising clock edge after the hit
// (the EOP), computed from the clock's own edge times. It also checks that a
// second TIME_IN edge while the pulse is high does not stretch it, and that
// reset holds TDC_IN low.
`timescale 1ps/100fs
module tb_tdc_input_logic;
  localparam realtime T_CLK = 1818.0;

  logic time_in = 1'b0, clk = 1'b0, rst = 1'b1;
  logic tdc_in;
  int checks = 0, failures = 0;

  tdc_input_logic dut (.time_in(time_in), .clk(clk), .rst(rst), .tdc_in(tdc_in));

  initial forever #(T_CLK/2) clk = ~clk;   // rising edges at 909 + k*1818

  function automatic realtime next_edge(realtime t);
    int k;
    k = int'($floor((t - 909.0) / T_CLK)) + 1;
    return 909.0 + k * T_CLK;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  initial begin
    realtime t_hit, t_exp, gap;
    #3000.5;
    rst = 1'b1;
    time_in = 1'b1; #10; time_in = 1'b0;
    check(tdc_in == 1'b0, "reset holds TDC_IN low");
    rst = 1'b0;
    #1000;
    for (int n = 0; n < 300; n++) begin
      gap = 100.0 + ($urandom % 5000) + 0.5;
      #(gap);
      t_hit = $realtime;
      // keep the hit at least 3 ps from a clock edge
      if (next_edge(t_hit) - t_hit < 3.0) begin #5; t_hit = $realtime; end
      t_exp = next_edge(t_hit);
      check(tdc_in == 1'b0, "TDC_IN idle before hit");
      time_in = 1'b1;
      #0.2;
      check(tdc_in == 1'b1, "SOP follows TIME_IN");
      if (n % 3 == 0 && (t_exp - $realtime) > 4.0) begin
        // a second edge during the pulse must not extend it
        #1; time_in = 1'b0; #1; time_in = 1'b1;
      end
      @(negedge tdc_in);
      check($realtime == t_exp, "EOP on next CLK edge");
      if ($realtime != t_exp) $display("  hit %0t expected %0t got %0t", t_hit, t_exp, $realtime);
      #7;
      time_in = 1'b0;
      check(tdc_in == 1'b0, "TDC_IN low after EOP");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5000.0 * T_CLK * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
