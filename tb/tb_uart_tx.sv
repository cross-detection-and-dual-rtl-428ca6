// tb_uart_tx: sends random bytes through the transmitter (8 clocks per bit)
// with random gaps, and receives them here by sampling the line in the middle
// of every bit. Checks each byte, the start and stop bits, the idle level, the
// 10-bit frame length in clock cycles and that ready is low for a whole frame.
`timescale 1ps/1ps
module tb_uart_tx;
  localparam int CPB = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic valid = 1'b0, ready, txd;
  logic [7:0] data;
  int checks = 0, failures = 0;
  logic [7:0] sent[$];

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk(clk), .rst(rst), .valid(valid), .data(data), .ready(ready), .txd(txd));

  initial forever #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // transmitter side
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    repeat (2) @(posedge clk);
    #1 check(txd == 1'b1 && ready == 1'b1, "idle line high, ready");
    for (int n = 0; n < 200; n++) begin
      data = 8'($urandom);
      valid = 1'b1;
      @(posedge clk);
      while (!ready) @(posedge clk);
      sent.push_back(data);
      #1 valid = 1'b0;
      repeat ($urandom % 20) @(posedge clk);
    end
  end

  // receiver side
  initial begin
    logic [7:0] b;
    int busy_cycles;
    @(negedge rst);
    for (int n = 0; n < 200; n++) begin
      @(negedge txd);
      busy_cycles = 0;
      repeat (CPB / 2) @(posedge clk);
      #1 check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        #1 b[i] = txd;
      end
      repeat (CPB) @(posedge clk);
      #1 check(txd == 1'b1, "stop bit");
      check(ready == 1'b0, "busy during stop bit");
      check(sent.size() > 0 && b == sent.pop_front(), "received byte");
      repeat (CPB / 2) @(posedge clk);
      #1 check(ready == 1'b1 || valid, "ready after 10 bit times");
    end
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
