// tb_code_density: code-density test of one channel at its default size.
//
// 90,900 hits arrive at random times, uniformly spread over the clock period
// and unrelated to it, as in a code-density calibration. The capture clock
// carries random jitter of -10..+18 ps around its 21 ps phase. For every time
// tag the bench histograms three codes:
//   - the position of the highest 1 in physical tap order (no cross-detection),
//   - the SOP position in cross-detection order (tag_sop_pos),
//   - the EOP-corrected fine code in half taps (tag_fine_half).
// The number of distinct codes seen is the number of usable bins per clock
// period. The bench checks that cross-detection gives more bins than physical
// order, that the EOP correction gives more again, that every hit is tagged
// unless it lands within a few taps of the EOP, and that the codes stay in
// range. It prints the bin counts, average bin sizes and the share of codes
// with bubbles in physical and in cross-detection order, and the DNL and INL
// of each code over the codes that occur, each in its own LSB (average bin
// size), with end-of-run checks on the corrected code's DNL and INL ranges.
`timescale 1ps/100fs
module tb_code_density;
  localparam int N = 172;
  localparam int N_HITS = 90900;
  localparam realtime T_CLK = 1818.0;
  localparam int PHI = 21;

  logic time_in = 1'b0, clk = 1'b0, clk_capture = 1'b0, rst = 1'b1;
  logic tdc_in, tag_valid, uart_txd, readout_busy;
  logic [11:0] tag_coarse;
  logic [7:0] tag_sop_pos;
  logic [2:0] tag_eop_pos;
  logic signed [9:0] tag_fine_half;
  logic [N-1:0] raw_sop_q, cd_sop_q;
  logic [3:0] raw_eop_q, cd_eop_q;
  logic [15:0] dropped;

  cd_dsm_tdc_top dut (
    .time_in(time_in), .clk(clk), .clk_capture(clk_capture), .rst(rst), .tdc_in(tdc_in),
    .tag_valid(tag_valid), .tag_coarse(tag_coarse), .tag_sop_pos(tag_sop_pos),
    .tag_eop_pos(tag_eop_pos), .tag_fine_half(tag_fine_half), .raw_sop_q(raw_sop_q),
    .cd_sop_q(cd_sop_q), .raw_eop_q(raw_eop_q), .cd_eop_q(cd_eop_q), .uart_txd(uart_txd),
    .readout_busy(readout_busy), .dropped(dropped));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $realtime); end
  endtask

  initial forever #(T_CLK / 2) clk = ~clk;
  always @(posedge clk) begin
    int ph;
    do ph = PHI + int'($urandom % 29) - 10;
    while (ph == 2 || ph == 8 || ph == 14 || ph == 17 || ph == 24 || ph == 29 || ph == 36);
    fork begin #(ph) clk_capture = 1'b1; #(909) clk_capture = 1'b0; end join_none
  end

  int h_phys[int], h_cd[int], h_dsm[int];
  int n_tags = 0, n_bub_phys = 0, n_bub_cd = 0;

  // a clean code is 0..0 1..1 0..0: at most one 0->1 step scanning upward
  function automatic bit has_bubble(logic [N-1:0] c);
    int rises = 0;
    for (int i = 1; i < N; i++) if (c[i] && !c[i-1]) rises++;
    if (c[0]) rises++;
    return rises > 1;
  endfunction
  logic [N-1:0] last_raw;

  // DNL and INL of one histogram over the codes that occur (its bins), in units
  // of its average bin size: bin width = T_CLK * count / total,
  // DNL = width / LSB - 1, INL = running sum of DNL from the lowest bin
  task automatic lin(input int h[int], input string name,
                     output real dnl_min, output real dnl_max, output real inl_min, output real inl_max);
    int tot;
    real lsb, w, d, acc;
    tot = 0;
    foreach (h[k]) tot += h[k];
    lsb = T_CLK / h.num();
    dnl_min = 1.0e9; dnl_max = -1.0e9; inl_min = 1.0e9; inl_max = -1.0e9; acc = 0.0;
    foreach (h[k]) begin
      w = T_CLK * h[k] / tot;
      d = w / lsb - 1.0;
      acc += d;
      if (d < dnl_min) dnl_min = d;
      if (d > dnl_max) dnl_max = d;
      if (acc < inl_min) inl_min = acc;
      if (acc > inl_max) inl_max = acc;
    end
    $display("%s: DNL [%0.2f %0.2f] LSB, INL [%0.2f %0.2f] LSB (LSB %0.2f ps)",
             name, dnl_min, dnl_max, inl_min, inl_max, lsb);
  endtask

  // the raw word of the capture that produced a tag is the one before it
  always @(posedge clk_capture) begin
    logic [N-1:0] w;
    int top;
    w = last_raw;
    #1;
    last_raw = raw_sop_q;
    if (tag_valid) begin
      n_tags++;
      top = 0;
      for (int i = 0; i < N; i++) if (w[i]) top = i + 1;
      h_phys[top]++;
      begin
        logic [N-1:0] cw;
        for (int i = 0; i < N; i++) cw[i] = w[i ^ 1];
        if (has_bubble(w)) n_bub_phys++;
        if (has_bubble(cw)) n_bub_cd++;
      end
      h_cd[int'(tag_sop_pos)]++;
      h_dsm[int'(tag_fine_half)]++;
      check(tag_sop_pos <= 8'(N) && tag_fine_half >= 0 && tag_fine_half <= 10'(2 * N + 2), "codes in range");
    end
  end

  initial begin
    int gap;
    #(10 * T_CLK + 100);
    rst = 1'b0;
    #(5 * T_CLK);
    for (int n = 0; n < N_HITS; n++) begin
      gap = 3 + $urandom % 3;
      #(gap * T_CLK + ($urandom % 1818));
      if ($realtime - $floor($realtime) < 0.25) #0.5;
      time_in = 1'b1;
      #300 time_in = 1'b0;
    end
    #(10 * T_CLK);
    $display("hits=%0d tags=%0d", N_HITS, n_tags);
    $display("bins per clock period: physical order %0d, cross-detection %0d, CD + EOP correction %0d",
             h_phys.num(), h_cd.num(), h_dsm.num());
    $display("average bin size (ps): %0.1f, %0.1f, %0.1f",
             T_CLK / h_phys.num(), T_CLK / h_cd.num(), T_CLK / h_dsm.num());
    $display("codes with bubbles: physical order %0.1f %%, cross-detection order %0.1f %%",
             100.0 * n_bub_phys / n_tags, 100.0 * n_bub_cd / n_tags);
    begin
      real a0, a1, a2, a3, b0, b1, b2, b3, c0, c1, c2, c3;
      lin(h_phys, "physical order", a0, a1, a2, a3);
      lin(h_cd, "cross-detection", b0, b1, b2, b3);
      lin(h_dsm, "CD + EOP correction", c0, c1, c2, c3);
      check(c0 > -1.0 && c1 - c0 < 4.0, "CD + EOP DNL range within 4 LSB");
      check(c3 - c2 < 10.0, "CD + EOP INL range within 10 LSB");
    end
    check(n_tags > N_HITS * 97 / 100, "nearly every hit tagged");
    check(n_bub_cd < n_bub_phys / 10, "cross-detection removes bubbles");
    check(h_cd.num() > h_phys.num() + h_phys.num() / 2, "cross-detection adds bins");
    check(h_dsm.num() > h_cd.num() + h_cd.num() / 2, "EOP correction adds half-tap bins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(real'(N_HITS) * 8.0 * T_CLK);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
