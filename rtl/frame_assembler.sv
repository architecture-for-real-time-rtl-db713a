// frame_assembler: gathers serial bytes into one time-stamped frame.
//
// FRAME_W/8 bytes (six for the 48-bit frame) are shifted in, most
// significant byte first, so the three 16-bit words of a frame arrive in
// the order bits 47:32, 31:16 (which holds the time stamp at 23:16) and
// 15:0. When the last byte is in, the frame is offered on frame/frame_valid
// and held until frame_ready; no byte is accepted meanwhile (in_ready low),
// which is how a stall of the sorter reaches the serial receiver. Both
// sides use a valid/ready handshake (transfer when both are high). The
// frame width follows the original design; the byte order and the
// handshake are this design's choice. Reset is synchronous.
module frame_assembler #(
  parameter int unsigned FRAME_W = 48
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         in_data,
  input  logic               in_valid,
  output logic               in_ready,
  output logic [FRAME_W-1:0] frame,
  output logic               frame_valid,
  input  logic               frame_ready
);
  localparam int unsigned NB = FRAME_W / 8;
  localparam int unsigned BW = $clog2(NB + 1);

  logic [BW-1:0] nbytes;

  assign in_ready = !frame_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      nbytes      <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      if (frame_valid && frame_ready) frame_valid <= 1'b0;
      if (in_valid && in_ready) begin
        frame <= {frame[FRAME_W-9:0], in_data};
        if (nbytes == BW'(NB - 1)) begin
          nbytes      <= '0;
          frame_valid <= 1'b1;
        end else nbytes <= nbytes + 1'b1;
      end
    end
  end
endmodule
