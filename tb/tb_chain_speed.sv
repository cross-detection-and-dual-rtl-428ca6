// tb_chain_speed: how the EOP monitor follows the speed of the carry chain.
//
// Three channels share the clocks and receive the same hits. Their carry-chain
// models run at 95 %, 100 % and 106 % of the nominal delay, standing in for a
// cold, a room-temperature and a hot chain. For 3000 random hits the bench
// collects the distribution of EOP positions (M2, M1, M4, M3 = 1..4 taps passed)
// and the SOP position of each channel. A slower chain lets the EOP pass fewer
// monitor taps and the SOP fewer line taps, so both means must fall as the
// delay scale rises; this is the drift that the EOP correction feeds back into
// the SOP. Capture edges sit at .5 ps and hit edges at .25 ps, so no tap edge
// can coincide with a capture edge whatever the scaled delays are.
`timescale 1ps/10fs
module tb_chain_speed;
  localparam realtime T_CLK = 1818.0;
  localparam int PHI = 21;
  localparam int NCH = 3;

  logic time_in = 1'b0, clk = 1'b0, clk_capture = 1'b0, rst = 1'b1;
  logic [NCH-1:0] v;
  logic [7:0] sop[NCH];
  logic [2:0] eop[NCH];

  cd_dsm_tdc_top #(.DELAY_SCALE_PCT(95)) ch_cold (
    .time_in(time_in), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(),
    .tag_valid(v[0]), .tag_coarse(), .tag_sop_pos(sop[0]), .tag_eop_pos(eop[0]), .tag_fine_half(),
    .raw_sop_q(), .cd_sop_q(), .raw_eop_q(), .cd_eop_q(), .uart_txd(), .readout_busy(), .dropped());
  cd_dsm_tdc_top #(.DELAY_SCALE_PCT(100)) ch_room (
    .time_in(time_in), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(),
    .tag_valid(v[1]), .tag_coarse(), .tag_sop_pos(sop[1]), .tag_eop_pos(eop[1]), .tag_fine_half(),
    .raw_sop_q(), .cd_sop_q(), .raw_eop_q(), .cd_eop_q(), .uart_txd(), .readout_busy(), .dropped());
  cd_dsm_tdc_top #(.DELAY_SCALE_PCT(106)) ch_hot (
    .time_in(time_in), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(),
    .tag_valid(v[2]), .tag_coarse(), .tag_sop_pos(sop[2]), .tag_eop_pos(eop[2]), .tag_fine_half(),
    .raw_sop_q(), .cd_sop_q(), .raw_eop_q(), .cd_eop_q(), .uart_txd(), .readout_busy(), .dropped());

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial forever #(T_CLK / 2) clk = ~clk;
  always @(posedge clk) begin
    int j;
    real ph;
    j = int'($urandom % 21) - 8;
    ph = real'(PHI + j) + 0.5;
    fork begin #(ph) clk_capture = 1'b1; #(909) clk_capture = 1'b0; end join_none
  end

  int hist[NCH][5];
  real sop_sum[NCH], eop_sum[NCH];
  int n_tag[NCH];
  always @(posedge clk_capture) begin
    #1;
    for (int c = 0; c < NCH; c++) if (v[c]) begin
      hist[c][eop[c]]++;
      eop_sum[c] += eop[c];
      sop_sum[c] += sop[c];
      n_tag[c]++;
    end
  end

  initial begin
    string names[NCH] = '{"95 %", "100 %", "106 %"};
    real me[NCH], ms[NCH];
    for (int c = 0; c < NCH; c++) begin
      for (int e = 0; e < 5; e++) hist[c][e] = 0;
      sop_sum[c] = 0; eop_sum[c] = 0; n_tag[c] = 0;
    end
    #(10 * T_CLK + 100);
    rst = 1'b0;
    #(5 * T_CLK);
    for (int n = 0; n < 3000; n++) begin
      #(4 * T_CLK + ($urandom % 1818));
      #($ceil($realtime) - $realtime + 0.25);
      time_in = 1'b1;
      #300 time_in = 1'b0;
    end
    #(10 * T_CLK);
    for (int c = 0; c < NCH; c++) begin
      me[c] = eop_sum[c] / n_tag[c];
      ms[c] = sop_sum[c] / n_tag[c];
      $display("delay %s: tags %0d, EOP at M2/M1/M4/M3 = %0d/%0d/%0d/%0d, mean EOP %0.2f taps, mean SOP %0.1f taps",
               names[c], n_tag[c], hist[c][1], hist[c][2], hist[c][3], hist[c][4], me[c], ms[c]);
      check(n_tag[c] > 2900, "hits tagged");
    end
    check(me[0] > me[1] && me[1] > me[2], "EOP moves to lower positions as the chain slows");
    check(ms[0] > ms[1] && ms[1] > ms[2], "SOP moves to lower positions as the chain slows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(3000.0 * 8.0 * T_CLK);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
