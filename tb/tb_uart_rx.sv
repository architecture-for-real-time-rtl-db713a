// tb_uart_rx: drives 8-N-1 serial bytes into the receiver and checks the
// bytes, the handshake, the overrun pulse and the dropping of a byte with
// a bad stop bit.
`timescale 1ns/1ps
module tb_uart_rx;
  localparam int CPB = 16;
  logic clk = 0, rst = 1, rxd = 1, valid, ready = 0, overrun;
  logic [7:0] data;
  int checks = 0, failures = 0, overruns = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (!rst && overrun) overruns++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic stop = 1'b1);
    rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(posedge clk); end
    rxd = stop; repeat (CPB) @(posedge clk);
    rxd = 1;
  endtask

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] b;
    repeat (4) @(posedge clk); rst = 0;
    // Bytes read promptly.
    for (int n = 0; n < 40; n++) begin
      b = 8'($urandom());
      fork
        send(b);
        begin
          wait (valid);
          @(negedge clk);
          check(data == b, $sformatf("byte %0d got %h exp %h", n, data, b));
          ready = 1; @(negedge clk); ready = 0;
          check(!valid, "valid cleared after handshake");
        end
      join
      repeat ($urandom() % 8) @(posedge clk);
    end
    check(overruns == 0, "no overrun while reading promptly");
    // Two bytes without reading: overrun, the second byte is kept.
    send(8'hA5); send(8'h3C);
    repeat (2 * CPB) @(posedge clk);
    check(overruns == 1, "overrun pulse when a byte is left unread");
    check(valid && data == 8'h3C, "newest byte held after overrun");
    @(negedge clk); ready = 1; @(negedge clk); ready = 0;
    // Bad stop bit: byte dropped.
    send(8'h77, 1'b0);
    repeat (2 * CPB) @(posedge clk);
    check(!valid, "byte with a bad stop bit dropped");
    send(8'h81);
    repeat (CPB) @(posedge clk);
    check(valid && data == 8'h81, "receiver recovers after a framing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
