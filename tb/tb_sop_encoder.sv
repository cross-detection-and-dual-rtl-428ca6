// tb_sop_encoder: checks the thermometer-to-binary rule of the SOP encoder.
//
// Codes are built as the delay line produces them: zeros where the EOP has
// already passed, a run of ones up to the SOP front, zeros beyond, optionally
// with bubbles sprinkled anywhere. The expected position is the index of the
// highest 1 plus one, found here by scanning down from the top end. Empty and
// full codes and every single-1 code are covered too.
`timescale 1ps/1ps
module tb_sop_encoder;
  localparam int N = 172;
  localparam int PW = $clog2(N + 1);
  logic [N-1:0] code;
  logic [PW-1:0] pos;
  int checks = 0, failures = 0;

  sop_encoder #(.N_TAPS(N)) dut (.code(code), .pos(pos));

  function automatic int ref_pos(logic [N-1:0] c);
    for (int i = N - 1; i >= 0; i--) if (c[i]) return i + 1;
    return 0;
  endfunction

  task automatic check_code(logic [N-1:0] c);
    code = c;
    #1;
    checks++;
    if (int'(pos) != ref_pos(c)) begin
      failures++;
      $display("FAIL code=%h pos=%0d exp=%0d", c, pos, ref_pos(c));
    end
  endtask

  initial begin
    logic [N-1:0] c;
    int lo, hi, b;
    check_code('0);
    check_code('1);
    for (int i = 0; i < N; i++) check_code((N)'(1) << i);
    for (int n = 0; n < 3000; n++) begin
      lo = $urandom % 8;
      hi = lo + ($urandom % (N - lo));
      c = '0;
      for (int i = lo; i <= hi; i++) c[i] = 1'b1;
      if (n % 2 == 1) begin
        // bubbles: flip a few random bits
        repeat (1 + $urandom % 3) begin
          b = int'($urandom % N);
          c[b] = ~c[b];
        end
      end
      check_code(c);
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
