// tb_time_difference: two identical channels measure the delay between two
// copies of one signal, as in a cable-delay test.
//
// Both channels share CLK and a jittery CLK_CAPTURE. For each of four delays
// (-1989, -1072, +1012, +2000 ps, near the oscilloscope values measured for
// the published cable pairs) 1500 hit pairs are sent at random times; channel
// B sees the hit delayed by the set amount. Each pair is converted to a time
// difference from the two tags:
//   dt = (coarse_B - coarse_A) * 1818 ps - (fine_B - fine_A) * 5.375 ps
// where 5.375 ps is half of the model's mean tap delay (a real system takes
// it from a code-density calibration). The bench checks that the mean
// difference is within 6 ps of the set delay and that the spread stays below
// 12 ps, and prints mean and FWHM (2.355 sd) per delay.
`timescale 1ps/100fs
module tb_time_difference;
  localparam int N = 172;
  localparam realtime T_CLK = 1818.0;
  localparam int PHI = 21;
  localparam real HALF_TAP_PS = 5.375;

  logic hit_a = 1'b0, hit_b = 1'b0, clk = 1'b0, clk_capture = 1'b0, rst = 1'b1;
  logic v_a, v_b;
  logic [11:0] c_a, c_b;
  logic signed [9:0] f_a, f_b;

  cd_dsm_tdc_top ch_a (
    .time_in(hit_a), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(),
    .tag_valid(v_a), .tag_coarse(c_a), .tag_sop_pos(), .tag_eop_pos(), .tag_fine_half(f_a),
    .raw_sop_q(), .cd_sop_q(), .raw_eop_q(), .cd_eop_q(), .uart_txd(), .readout_busy(), .dropped());
  cd_dsm_tdc_top ch_b (
    .time_in(hit_b), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(),
    .tag_valid(v_b), .tag_coarse(c_b), .tag_sop_pos(), .tag_eop_pos(), .tag_fine_half(f_b),
    .raw_sop_q(), .cd_sop_q(), .raw_eop_q(), .cd_eop_q(), .uart_txd(), .readout_busy(), .dropped());

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  initial forever #(T_CLK / 2) clk = ~clk;
  always @(posedge clk) begin
    int ph;
    do ph = PHI + int'($urandom % 29) - 10;
    while (ph == 2 || ph == 8 || ph == 14 || ph == 17 || ph == 24 || ph == 29 || ph == 36);
    fork begin #(ph) clk_capture = 1'b1; #(909) clk_capture = 1'b0; end join_none
  end

  real tags_a[$], tags_b[$];
  always @(posedge clk_capture) begin
    #1;
    if (v_a) tags_a.push_back(real'(c_a) * T_CLK - real'(f_a) * HALF_TAP_PS);
    if (v_b) tags_b.push_back(real'(c_b) * T_CLK - real'(f_b) * HALF_TAP_PS);
  end

  task automatic pulse_a(); hit_a = 1'b1; #300 hit_a = 1'b0; endtask
  task automatic pulse_b(); hit_b = 1'b1; #300 hit_b = 1'b0; endtask

  initial begin
    int delays[4] = '{-1989, -1072, 1012, 2000};
    real s, s2, d, mean, sd, wrap;
    int n;
    wrap = 4096.0 * T_CLK;
    #(10 * T_CLK + 100);
    rst = 1'b0;
    #(5 * T_CLK);
    foreach (delays[k]) begin
      s = 0; s2 = 0; n = 0;
      for (int t = 0; t < 1500; t++) begin
        #(6 * T_CLK + ($urandom % 1818));
        if ($realtime - $floor($realtime) < 0.25) #0.5;
        if (delays[k] >= 0) fork pulse_a(); begin #(delays[k]) pulse_b(); end join
        else                fork pulse_b(); begin #(-delays[k]) pulse_a(); end join
        #(4 * T_CLK);
        if (tags_a.size() == 1 && tags_b.size() == 1) begin
          d = tags_b.pop_front() - tags_a.pop_front();
          if (d > wrap / 2) d -= wrap;
          if (d < -wrap / 2) d += wrap;
          s += d; s2 += d * d; n++;
        end else begin
          tags_a.delete(); tags_b.delete();   // a hit too close to the EOP was lost
        end
      end
      mean = s / n;
      sd = $sqrt(s2 / n - mean * mean);
      $display("set %0d ps: measured mean %0.1f ps, FWHM %0.1f ps, %0d pairs", delays[k], mean, 2.355 * sd, n);
      check(n > 1400, "pairs measured");
      check(mean - delays[k] < 6.0 && delays[k] - mean < 6.0, "mean difference");
      check(sd < 12.0, "spread");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(7000.0 * 12.0 * T_CLK);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
