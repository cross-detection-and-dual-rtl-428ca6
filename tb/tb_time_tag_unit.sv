// tb_time_tag_unit: checks the registered time tag.
//
// Each cycle a capture is presented as the delay line would hold it: zeros up
// to an EOP front, ones up to an SOP front, optional bubbles; plus a monitor
// code. Some captures are non-hits (empty line, EOP not yet in the monitor).
// The bench predicts, from its own scan of the code, whether a tag must appear
// one clock later and with which coarse count, SOP position, EOP position and
// half-tap fine code, and checks tag_valid every cycle.
`timescale 1ps/1ps
module tb_time_tag_unit;
  localparam int N = 172;
  localparam int PW = $clog2(N + 1);
  localparam int FW = PW + 2;

  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0] sop_code;
  logic [3:0] eop_code;
  logic [11:0] coarse;
  logic hit, tag_valid;
  logic [11:0] tag_coarse;
  logic [PW-1:0] tag_sop_pos;
  logic [2:0] tag_eop_pos;
  logic signed [FW-1:0] tag_fine_half;
  int checks = 0, failures = 0, n_hits = 0;

  time_tag_unit #(.N_TAPS(N), .COARSE_W(12), .EOP_REF(2)) dut (
    .clk(clk), .rst(rst), .sop_code(sop_code), .eop_code(eop_code), .coarse(coarse),
    .hit(hit), .tag_valid(tag_valid), .tag_coarse(tag_coarse), .tag_sop_pos(tag_sop_pos),
    .tag_eop_pos(tag_eop_pos), .tag_fine_half(tag_fine_half));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    bit exp_valid;
    int exp_sop, exp_eop, lo, hi, exp_fine;
    logic [11:0] exp_coarse;
    sop_code = '0; eop_code = 4'hF; coarse = '0;
    #5 clk = 1; #5 clk = 0;
    rst = 1'b0;
    exp_valid = 0;
    for (int n = 0; n < 2000; n++) begin
      // build a capture
      sop_code = '0;
      case ($urandom % 4)
        0: eop_code = 4'b1111;          // EOP not yet in monitor
        1: eop_code = 4'b1110;
        2: eop_code = 4'b1100;
        default: eop_code = ($urandom % 2) ? 4'b1000 : 4'b0000;
      endcase
      lo = 1 + $urandom % 4;
      hi = lo + $urandom % (N - lo);
      if ($urandom % 8 != 0) for (int i = lo; i <= hi; i++) sop_code[i] = 1'b1;
      if ($urandom % 4 == 0) begin
        lo = int'($urandom % N);
        sop_code[lo] = ~sop_code[lo];
      end
      coarse = 12'($urandom);
      // expectation from this bench's own decoding
      exp_sop = 0;
      for (int i = 0; i < N; i++) if (sop_code[i]) exp_sop = i + 1;
      exp_eop = 0;
      for (int b = 0; b < 4; b++) if (!eop_code[b]) exp_eop++;
      exp_fine = 2 * exp_sop + 2 - exp_eop;
      exp_valid = !eop_code[0] && (sop_code[7:4] != 0);
      exp_coarse = coarse;
      #5 clk = 1; #1;
      check(tag_valid == exp_valid, "tag_valid");
      if (exp_valid) begin
        n_hits++;
        check(tag_coarse == exp_coarse, "tag_coarse");
        check(int'(tag_sop_pos) == exp_sop, "tag_sop_pos");
        check(int'(tag_eop_pos) == exp_eop, "tag_eop_pos");
        check(int'(tag_fine_half) == exp_fine, "tag_fine_half");
      end
      #4 clk = 0;
    end
    check(n_hits > 500, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
