// tb_carry4_chain: checks the timing of the behavioural carry-chain model.
//
// A step and then a falling edge are sent down the full 43-cell chain. Every
// tap's switching time is recorded and compared with the intended delay,
// written out here independently as cell*43 ps plus 14, 8, 36, 29 ps for
// P1..P4. It also checks the property that cross-detection relies on: read in
// the swapped order P2 P1 P4 P3, switching times strictly increase, while in
// physical order every even tap switches before the odd tap below it.
`timescale 1ps/1ps
module tb_carry4_chain;
  localparam int N_CARRY4 = 43;
  localparam int N = 4 * N_CARRY4;

  logic chain_in = 1'b0;
  logic [N-1:0] taps;
  time t_rise[N], t_fall[N];
  int checks = 0, failures = 0;

  carry4_chain #(.N_CARRY4(N_CARRY4)) dut (.chain_in(chain_in), .taps(taps));

  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge taps[i]) t_rise[i] = $time;
    always @(negedge taps[i]) t_fall[i] = $time;
  end

  function automatic int exp_delay(int i);
    int off[4] = '{14, 8, 36, 29};
    return (i / 4) * 43 + off[i % 4];
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    time t0, t1;
    #100;
    check(taps == '0, "chain idle low");
    t0 = $time; chain_in = 1'b1;
    #3000;
    check(taps == '1, "all taps high after propagation");
    t1 = $time; chain_in = 1'b0;
    #3000;
    check(taps == '0, "all taps low after propagation");
    for (int i = 0; i < N; i++) begin
      check(t_rise[i] - t0 == time'(exp_delay(i)), $sformatf("rise delay tap %0d", i));
      check(t_fall[i] - t1 == time'(exp_delay(i)), $sformatf("fall delay tap %0d", i));
    end
    for (int j = 1; j < N; j++)
      check(t_rise[j ^ 1] > t_rise[(j - 1) ^ 1], $sformatf("CD order monotonic at %0d", j));
    for (int c = 0; c < N_CARRY4; c++) begin
      check(t_rise[4*c+1] < t_rise[4*c+0], "P2 before P1");
      check(t_rise[4*c+3] < t_rise[4*c+2], "P4 before P3");
    end
    // a short pulse travels the chain intact (transport delay)
    t0 = $time;
    chain_in = 1'b1; #20; chain_in = 1'b0;
    #(exp_delay(N - 1) + 30);
    check(t_rise[N-1] - t0 == time'(exp_delay(N - 1)), "20 ps pulse rises at the last tap");
    check(t_fall[N-1] - t0 == time'(exp_delay(N - 1) + 20), "20 ps pulse falls at the last tap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
