// tb_dsm_correction: checks EOP decoding, the half-tap correction and the hit
// rule exhaustively over every monitor code and every second-cell pattern, with
// random SOP positions. Expected values are worked out here: the EOP position
// is the number of monitor taps already low, the corrected fine code is
// 2*sop + EOP_REF - eop in half taps (an EOP one tap short of the reference adds
// half a tap), and a hit needs the first monitor tap low and some tap of the
// second delay-line cell high. Runs with both the default and another
// reference position.
`timescale 1ps/1ps
module tb_dsm_correction;
  localparam int N = 172;
  localparam int PW = $clog2(N + 1);
  localparam int FW = PW + 2;

  logic [PW-1:0] sop_pos;
  logic [3:0] eop_code, early;
  logic hit_a, hit_b;
  logic [2:0] eop_a, eop_b;
  logic signed [FW-1:0] fine_a, fine_b;
  int checks = 0, failures = 0;

  dsm_correction #(.N_TAPS(N)) dut_a (.sop_pos(sop_pos), .eop_code(eop_code), .early_taps(early),
                                      .hit(hit_a), .eop_pos(eop_a), .fine_half(fine_a));
  dsm_correction #(.N_TAPS(N), .EOP_REF(3)) dut_b (.sop_pos(sop_pos), .eop_code(eop_code), .early_taps(early),
                                      .hit(hit_b), .eop_pos(eop_b), .fine_half(fine_b));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s sop=%0d eop_code=%b early=%b", what, sop_pos, eop_code, early); end
  endtask

  initial begin
    int zeros, s;
    real t_a;
    for (int m = 0; m < 16; m++) begin
      for (int e = 0; e < 16; e++) begin
        for (int r = 0; r < 8; r++) begin
          s = (r == 0) ? 0 : (r == 1) ? N : int'($urandom % (N + 1));
          sop_pos = PW'(s);
          eop_code = 4'(m);
          early = 4'(e);
          #1;
          zeros = 0;
          for (int b = 0; b < 4; b++) if (((m >> b) & 1) == 0) zeros++;
          // time in taps with the 0.5 factor, then doubled
          t_a = s + 0.5 * (2 - zeros);
          check(int'(eop_a) == zeros, "eop_pos");
          check(int'(fine_a) == int'(2.0 * t_a), "fine_half ref 2");
          check(int'(fine_b) == 2 * s + 3 - zeros, "fine_half ref 3");
          check(hit_a == (((m & 1) == 0) && e != 0), "hit rule");
          check(hit_b == hit_a && eop_b == eop_a, "reference does not change hit/eop");
        end
      end
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
