// uart_rx: RS232 receiver, 8 data bits, no parity, 1 stop bit, LSB first.
//
// The serial line is synchronised by two flip-flops. A falling edge starts
// a frame; the start bit is checked half a bit later and each data bit is
// sampled in the middle of its bit time, CLKS_PER_BIT clocks apart. A
// byte whose stop bit reads high is placed in a holding register and
// offered with valid until ready is seen (valid/ready handshake, transfer
// when both are high). A byte arriving while the previous one is still
// held replaces it and raises overrun for one clock; a bad stop bit drops
// the byte. The default CLKS_PER_BIT is 50 MHz / 9600 bit/s, the serial
// settings of the original prototype; the sampling scheme and the overrun
// rule are this design's own. Reset is synchronous, active high.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 5208
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  input  logic       ready,
  output logic       overrun
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;
  state_t        state;
  logic [CW-1:0] tick;
  logic [2:0]    bitn;
  logic [7:0]    shreg;
  logic          rx_s1, rx_s2;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_s1 <= 1'b1;
      rx_s2 <= 1'b1;
    end else begin
      rx_s1 <= rxd;
      rx_s2 <= rx_s1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= IDLE;
      tick    <= '0;
      bitn    <= '0;
      shreg   <= '0;
      data    <= '0;
      valid   <= 1'b0;
      overrun <= 1'b0;
    end else begin
      overrun <= 1'b0;
      if (valid && ready) valid <= 1'b0;
      unique case (state)
        IDLE: begin
          tick <= '0;
          if (!rx_s2) state <= START;
        end
        START: begin
          if (tick == CW'(CLKS_PER_BIT / 2 - 1)) begin
            tick  <= '0;
            bitn  <= '0;
            state <= rx_s2 ? IDLE : DATA;   // glitch: back to idle
          end else tick <= tick + 1'b1;
        end
        DATA: begin
          if (tick == CW'(CLKS_PER_BIT - 1)) begin
            tick  <= '0;
            shreg <= {rx_s2, shreg[7:1]};
            bitn  <= bitn + 1'b1;
            if (bitn == 3'd7) state <= STOP;
          end else tick <= tick + 1'b1;
        end
        STOP: begin
          if (tick == CW'(CLKS_PER_BIT - 1)) begin
            tick  <= '0;
            state <= IDLE;
            if (rx_s2) begin
              data  <= shreg;
              valid <= 1'b1;
              if (valid && !ready) overrun <= 1'b1;
            end
          end else tick <= tick + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
