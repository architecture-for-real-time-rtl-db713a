// uart_tx: RS232 transmitter, 8 data bits, no parity, 1 stop bit, LSB first.
//
// A byte is taken when valid and ready are both high. The line then
// carries one start bit (low), the eight data bits LSB first and one stop
// bit (high), each CLKS_PER_BIT clocks long, and idles high afterwards.
// ready is high while the transmitter is idle and also in the last clock
// of a stop bit, so bytes offered back to back leave with no gap, one per
// 10*CLKS_PER_BIT clocks: the same rate at which uart_rx receives them.
// The default CLKS_PER_BIT is 50 MHz / 9600 bit/s, the serial settings of
// the original prototype; the handshake is this design's own. Reset is
// synchronous, active high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 5208
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  logic          busy;
  logic [CW-1:0] tick;
  logic [3:0]    bitn;     // 0 = start bit, 1..8 = data, 9 = stop
  logic [9:0]    shreg;
  logic          bit_end;

  assign bit_end = (tick == CW'(CLKS_PER_BIT - 1));
  assign ready   = !busy || (bit_end && bitn == 4'd9);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      tick  <= '0;
      bitn  <= '0;
      shreg <= '1;
      txd   <= 1'b1;
    end else if (valid && ready) begin
      busy  <= 1'b1;
      shreg <= {1'b1, data, 1'b0};
      txd   <= 1'b0;
      tick  <= '0;
      bitn  <= '0;
    end else if (!busy) begin
      txd <= 1'b1;
    end else if (bit_end) begin
      tick <= '0;
      if (bitn == 4'd9) begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end else begin
        bitn <= bitn + 1'b1;
        txd  <= shreg[bitn + 4'd1];
      end
    end else tick <= tick + 1'b1;
  end
endmodule
