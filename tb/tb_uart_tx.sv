// tb_uart_tx: sends random bytes through the transmitter, decodes the line
// in the middle of every bit, and checks the start and stop bits, the data
// and the byte time of 10*CLKS_PER_BIT clocks from one accepted byte
// to the next.
`timescale 1ns/1ps
module tb_uart_tx;
  localparam int CPB = 16;
  logic clk = 0, rst = 1, valid = 0, ready, txd;
  logic [7:0] data = 0;
  int checks = 0, failures = 0;
  logic [7:0] sent [$];
  longint cyc = 0, last_acc = -1;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Driver: offers bytes back to back.
  initial begin
    repeat (4) @(posedge clk); rst = 0;
    for (int n = 0; n < 30; n++) begin
      @(negedge clk);
      data = 8'($urandom()); valid = 1;
      while (!ready) @(negedge clk);
      // ready is high here: the byte is taken at the next rising edge.
      sent.push_back(data);
      if (last_acc >= 0) check(cyc - last_acc == 10 * CPB,
                               $sformatf("byte time %0d", cyc - last_acc));
      last_acc = cyc;
      @(negedge clk); valid = 0;
    end
  end

  // Line decoder.
  initial begin
    logic [7:0] b;
    @(negedge rst);
    for (int n = 0; n < 30; n++) begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 0, "start bit");
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = txd; end
      repeat (CPB) @(posedge clk);
      check(txd == 1, "stop bit");
      check(sent.size() > 0 && b == sent[0], $sformatf("byte %0d got %h", n, b));
      if (sent.size() > 0) void'(sent.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
