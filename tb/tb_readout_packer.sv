// tb_readout_packer: checks the per-hit serial record.
//
// Hits with random 172-bit codes, monitor codes and coarse counts are offered
// at random times while the byte sink accepts bytes with random stalls. The
// bench rebuilds each record from the bytes it receives (sync byte, then the
// payload least significant byte first) and compares it field by field with
// what it offered. Hits offered while a record is in flight must be dropped
// and counted; the offered byte must not change while it waits.
`timescale 1ps/1ps
module tb_readout_packer;
  import tdc_pkg::*;
  localparam int N = 172;
  localparam int NB = (N + 4 + 12 + 7) / 8;   // 24 payload bytes

  logic clk = 1'b0, rst = 1'b1;
  logic hit = 1'b0;
  logic [N-1:0] sop_code;
  logic [3:0] eop_code;
  logic [11:0] coarse;
  logic tx_valid, tx_ready = 1'b0, busy;
  logic [7:0] tx_data;
  logic [15:0] dropped;
  int checks = 0, failures = 0, exp_dropped = 0, records = 0;

  typedef struct { logic [N-1:0] sop; logic [3:0] eop; logic [11:0] coarse; } rec_t;
  rec_t expq[$];

  readout_packer #(.N_TAPS(N), .COARSE_W(12)) dut (
    .clk(clk), .rst(rst), .hit(hit), .sop_code(sop_code), .eop_code(eop_code), .coarse(coarse),
    .tx_valid(tx_valid), .tx_ready(tx_ready), .tx_data(tx_data), .busy(busy), .dropped(dropped));

  initial forever #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // hit source: drive on negedge, DUT samples on posedge
  initial begin
    rec_t r;
    sop_code = '0; eop_code = '0; coarse = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      hit = ($urandom % 6 == 0);
      for (int i = 0; i < N; i += 32) sop_code[i +: 32] = $urandom;
      eop_code = 4'($urandom);
      coarse = 12'($urandom);
      if (hit) begin
        r.sop = sop_code; r.eop = eop_code; r.coarse = coarse;
        if (busy) exp_dropped++;
        else expq.push_back(r);
      end
    end
    @(negedge clk) hit = 1'b0;
  end

  // byte sink with random stalls
  initial begin
    logic [8*NB-1:0] pay;
    logic [7:0] held;
    rec_t r;
    forever begin
      @(negedge clk);
      tx_ready = ($urandom % 3 != 0);
    end
  end

  initial begin
    logic [8*NB-1:0] pay;
    rec_t r;
    int k;
    logic [7:0] prev_data;
    logic prev_wait;
    @(negedge rst);
    prev_wait = 0;
    k = -1;
    forever begin
      @(posedge clk);
      if (prev_wait) check(tx_valid && tx_data == prev_data, "byte held while waiting");
      prev_wait = tx_valid && !tx_ready;
      prev_data = tx_data;
      if (tx_valid && tx_ready) begin
        if (k < 0) begin
          check(tx_data == SYNC_BYTE, "sync byte");
          k = 0;
        end else begin
          pay[8*k +: 8] = tx_data;
          k++;
          if (k == NB) begin
            r = expq.pop_front();
            check(pay[N-1:0] == r.sop, "record SOP code");
            check(pay[N+3:N] == r.eop, "record EOP code");
            check(pay[N+15:N+4] == r.coarse, "record coarse");
            check(pay[8*NB-1:N+16] == '0, "record padding");
            records++;
            k = -1;
          end
        end
      end
    end
  end

  initial begin
    #200000;
    wait (!busy);
    repeat (5) @(posedge clk);
    check(expq.size() == 0, "all records received");
    check(records > 5, "several records");
    check(exp_dropped > 0 && int'(dropped) == exp_dropped, "dropped count");
    $display("records=%0d dropped=%0d", records, dropped);
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
