// tb_cd_dsm_tdc_top: end-to-end test of one CD-DSM TDC channel at its default
// size (43 + 1 CARRY4 cells, 12-bit coarse counter, 115200-baud readout).
//
// CLK runs at 550 MHz (1818 ps). CLK_CAPTURE has the same period, follows CLK
// by a nominal 21 ps and carries random jitter of -10..+18 ps per edge. Hits
// arrive at random half-picosecond times. For every capture edge the bench
// predicts, from the hit time, the CLK edge that ends the pulse and its own
// table of tap delays, which taps of the delay line and of the monitor cell
// must hold 1; it checks the raw and cross-detection words, the hit decision,
// the registered time tag (coarse count, SOP and EOP positions, corrected fine
// code), the dropped-hit counter and two complete serial records, decoded from
// the UART line.
//
// It also counts how often each mechanism occurred and fails if one never did:
// a bubble in physical tap order removed by cross-detection, each EOP position
// 1..4 (so the DSM correction is applied in both directions), a capture holding
// only the SOP and one holding only the pulse tail (both rejected), a coarse
// counter wrap, a hit dropped while the UART was busy, and a serial record.
// Finally it checks that the EOP correction reduces the spread of the
// measured time caused by the capture-clock jitter.
`timescale 1ps/100fs
module tb_cd_dsm_tdc_top;
  import tdc_pkg::*;
  localparam int NC = 43;
  localparam int N = 4 * NC;
  localparam int NB = (N + 4 + 12 + 7) / 8;
  localparam int CPB = 4774;
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
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  // intended tap delays of the carry-chain model, ps
  function automatic int dly(int i);
    int off[4] = '{14, 8, 36, 29};
    return (i / 4) * 43 + off[i % 4];
  endfunction
  int cd_src[4] = '{1, 0, 3, 2};   // CD position k reads physical bit cd_src[k]

  // ---------------------------------------------------------------- clocks
  realtime t_clk_edge = -1.0;
  initial forever #(T_CLK / 2) clk = ~clk;   // rising at 909 + k*1818
  always @(posedge clk) begin
    int j, ph;
    t_clk_edge = $realtime;
    do begin
      j = int'($urandom % 29) - 10;
      ph = PHI + j;
    end while (ph == 2 || ph == 8 || ph == 14 || ph == 17 || ph == 24 || ph == 29 || ph == 36);
    fork
      begin
        #(ph) clk_capture = 1'b1;
        #(909) clk_capture = 1'b0;
      end
    join_none
  end

  // ---------------------------------------------------------------- hits
  realtime t_s = -1.0e9, t_e = -1.0e9;   // current pulse: SOP and EOP times
  int n_sent = 0;
  bit phase2 = 0;

  function automatic realtime next_edge(realtime t);
    int k;
    k = int'($floor((t - 909.0) / T_CLK)) + 1;
    return 909.0 + k * T_CLK;
  endfunction

  task automatic send_hit();
    realtime t;
    // hit times sit half-way between whole picoseconds, so no tap edge ever
    // coincides with a capture edge
    if ($realtime - $floor($realtime) < 0.25) #0.5;
    t = $realtime;
    if (next_edge(t) - t < 2.0) begin #4; t = $realtime; end
    t_s = t;
    t_e = next_edge(t);
    time_in = 1'b1;
    #300 time_in = 1'b0;
    n_sent++;
  endtask

  // ---------------------------------------------------------------- reference per capture
  int ncap = 0;                      // coarse counter model
  bit exp_tag_valid = 0;
  int exp_sop, exp_eop, exp_fine;
  logic [11:0] exp_coarse;
  logic [N-1:0] exp_raw, exp_cd;
  logic [3:0] exp_mraw, exp_mcd;
  int n_exp_hits = 0, n_tags = 0;
  int n_bubble_removed = 0, n_early_rejected = 0, n_tail_rejected = 0, n_wrap = 0;
  int n_eop[5] = '{0, 0, 0, 0, 0};
  logic [11:0] last_tag_coarse;
  bit have_last = 0;
  // record expected for the UART: one per hit taken while idle
  logic [8*NB-1:0] exp_rec[$];
  bit model_busy = 0;
  int exp_dropped = 0;
  // jitter statistics: true position in the clock period vs estimates
  real s_u = 0, s_u2 = 0, s_c = 0, s_c2 = 0;
  int n_stat = 0;

  function automatic bit has_bubble(logic [N-1:0] c);
    // a clean code is 0..0 1..1 0..0; count 0->1 transitions scanning upward
    int rises = 0;
    for (int i = 1; i < N; i++) if (c[i] && !c[i-1]) rises++;
    if (c[0]) rises++;
    return rises > 1;
  endfunction

  always @(posedge clk_capture) begin
    realtime tc;
    bit h;
    tc = $realtime;
    ncap = rst ? 0 : ncap + 1;
    for (int i = 0; i < N; i++) exp_raw[i] = (t_s + dly(i) < tc) && !(t_e + dly(i) < tc);
    for (int i = 0; i < 4; i++) exp_mraw[i] = (t_s + dly(i) < tc) && !(t_e + dly(i) < tc);
    for (int g = 0; g < N / 4; g++)
      for (int k = 0; k < 4; k++) exp_cd[4*g + k] = exp_raw[4*g + cd_src[k]];
    for (int k = 0; k < 4; k++) exp_mcd[k] = exp_mraw[cd_src[k]];
    #1;
    // tag of the previous capture
    check(tag_valid == exp_tag_valid, "tag_valid");
    if (exp_tag_valid && tag_valid) begin
      n_tags++;
      check(tag_coarse == exp_coarse, "tag_coarse");
      check(int'(tag_sop_pos) == exp_sop, "tag_sop_pos");
      check(int'(tag_eop_pos) == exp_eop, "tag_eop_pos");
      check(int'(tag_fine_half) == exp_fine, "tag_fine_half");
      if (have_last && tag_coarse < last_tag_coarse) n_wrap++;
      last_tag_coarse = tag_coarse;
      have_last = 1;
    end
    if (!rst) begin
      check(raw_sop_q == exp_raw, "raw delay-line word");
      check(cd_sop_q == exp_cd, "CD delay-line word");
      check(raw_eop_q == exp_mraw && cd_eop_q == exp_mcd, "monitor words");
    end
    h = !exp_mcd[0] && (exp_cd[7:4] != 0) && !rst;
    exp_tag_valid = h;
    if (h) begin
      n_exp_hits++;
      exp_sop = 0;
      for (int i = 0; i < N; i++) if (exp_cd[i]) exp_sop = i + 1;
      exp_eop = 0;
      for (int k = 0; k < 4; k++) if (!exp_mcd[k]) exp_eop++;
      exp_fine = 2 * exp_sop + 2 - exp_eop;
      exp_coarse = 12'(ncap);
      n_eop[exp_eop]++;
      if (has_bubble(exp_raw) && !has_bubble(exp_cd)) n_bubble_removed++;
      check(!has_bubble(exp_cd), "CD word free of bubbles");
      if (model_busy) exp_dropped++;
      else begin
        exp_rec.push_back((8*NB)'({exp_coarse, exp_mcd, exp_cd}));
        model_busy = 1;
      end
      // hit position inside its clock period, against both estimates
      begin
        real truth, est_u, est_c;
        truth = t_e - t_s;
        est_u = exp_sop * 10.75 - PHI;
        est_c = exp_fine * 10.75 / 2.0 - PHI;
        s_u += est_u - truth; s_u2 += (est_u - truth) ** 2;
        s_c += est_c - truth; s_c2 += (est_c - truth) ** 2;
        n_stat++;
      end
    end else if (exp_raw != 0 && !rst) begin
      if (tc < t_e) n_early_rejected++;
      else n_tail_rejected++;
    end
  end

  // ---------------------------------------------------------------- UART receiver
  int n_records = 0;
  always @(negedge uart_txd) begin
    logic [7:0] b;
    logic [8*NB-1:0] rec;
    int k;
    if (!rst) begin
      k = -1;
      // receive 1 + NB bytes back to back (each frame is awaited separately)
      for (int f = 0; f < NB + 1; f++) begin
        if (f > 0) @(negedge uart_txd);
        repeat (CPB / 2) @(posedge clk_capture);
        #2 check(uart_txd == 1'b0, "UART start bit");
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk_capture);
          #2 b[i] = uart_txd;
        end
        repeat (CPB) @(posedge clk_capture);
        #2 check(uart_txd == 1'b1, "UART stop bit");
        if (f == 0) check(b == SYNC_BYTE, "UART sync byte");
        else rec[8*(f-1) +: 8] = b;
      end
      check(exp_rec.size() > 0 && rec == exp_rec.pop_front(), "UART record contents");
      n_records++;
      model_busy = 0;
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    real sd_u, sd_c;
    int gap;
    #(10 * T_CLK + 100);
    rst = 1'b0;
    #(5 * T_CLK);
    // phase 1: a burst of hits; the first is read out, the rest are dropped
    for (int n = 0; n < 450; n++) begin
      gap = 3 + $urandom % 18;
      #(gap * T_CLK + ($urandom % 1818) + 0.5);
      send_hit();
    end
    // phase 2: one more hit once the first record has gone out
    wait (n_records == 1);
    #(7 * T_CLK + 300.5);
    send_hit();
    wait (n_records == 2);
    #(20 * T_CLK);
    check(int'(dropped) == exp_dropped, "dropped-hit counter");
    check(n_tags == n_exp_hits, "one tag per hit");
    check(n_exp_hits > 400, "most hits produce a tag");
    sd_u = $sqrt(s_u2 / n_stat - (s_u / n_stat) ** 2);
    sd_c = $sqrt(s_c2 / n_stat - (s_c / n_stat) ** 2);
    $display("hits sent=%0d tagged=%0d dropped=%0d records=%0d", n_sent, n_tags, dropped, n_records);
    $display("mechanisms: bubbles removed by CD=%0d, EOP positions 0..4 = %0d %0d %0d %0d %0d",
             n_bubble_removed, n_eop[0], n_eop[1], n_eop[2], n_eop[3], n_eop[4]);
    $display("            early-SOP captures rejected=%0d, tail captures rejected=%0d, coarse wraps=%0d",
             n_early_rejected, n_tail_rejected, n_wrap);
    $display("time spread (ps sd): SOP only %0.2f, SOP corrected by EOP %0.2f", sd_u, sd_c);
    check(n_bubble_removed > 0, "mechanism: CD removed a bubble");
    for (int e = 1; e <= 4; e++) check(n_eop[e] > 0, $sformatf("mechanism: EOP position %0d", e));
    check(n_early_rejected > 0, "mechanism: early-SOP capture rejected");
    check(n_tail_rejected > 0, "mechanism: pulse-tail capture rejected");
    check(n_wrap > 0, "mechanism: coarse counter wrap");
    check(exp_dropped > 0, "mechanism: hit dropped while busy");
    check(n_records == 2, "mechanism: serial records");
    check(sd_c < sd_u, "EOP correction reduces jitter spread");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(3500000 * T_CLK);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
