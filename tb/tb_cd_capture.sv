// tb_cd_capture: checks the capture flip-flops and the cross-detection order.
//
// Random 172-bit tap words are applied between clock edges. After each edge
// raw_q must equal the word present at the edge, and cd_q must hold, in every
// group of four, the captured bits in the order P2 P1 P4 P3 (written out here
// as an explicit table, not as an index formula). Words applied after the edge
// must not show up until the next edge.
`timescale 1ps/1ps
module tb_cd_capture;
  localparam int N = 172;
  logic clk = 1'b0;
  logic [N-1:0] taps, raw_q, cd_q, sampled, exp_cd;
  int checks = 0, failures = 0;
  int order[4] = '{1, 0, 3, 2};   // CD position k takes physical bit order[k]

  cd_capture #(.N_TAPS(N)) dut (.clk_capture(clk), .taps(taps), .raw_q(raw_q), .cd_q(cd_q));

  function automatic logic [N-1:0] rand_word();
    logic [N-1:0] w;
    for (int i = 0; i < N; i += 32) w[i +: 32] = $urandom;  // top slice truncates
    return w;
  endfunction

  initial begin
    taps = '0;
    for (int n = 0; n < 500; n++) begin
      taps = rand_word();
      sampled = taps;
      #5 clk = 1'b1;
      #1 taps = rand_word();   // changes after the edge are not captured
      #4;
      for (int g = 0; g < N / 4; g++)
        for (int k = 0; k < 4; k++) exp_cd[4*g + k] = sampled[4*g + order[k]];
      checks++; if (raw_q !== sampled) begin failures++; $display("FAIL raw_q %0d", n); end
      checks++; if (cd_q !== exp_cd) begin failures++; $display("FAIL cd_q %0d", n); end
      #5 clk = 1'b0;
      #5;
      checks++; if (raw_q !== sampled) begin failures++; $display("FAIL raw_q held %0d", n); end
    end
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
