// frame_serializer: sends each sorted frame as bytes, most significant
// first.
//
// A frame is taken on frame_valid/frame_ready into a shift register and
// sent as FRAME_W/8 bytes on out_data/out_valid/out_ready (valid/ready
// handshake, transfer when both are high), bits 47:40 first. frame_ready
// is high only when the register is empty, so the next frame is taken one
// clock after the last byte of the previous one has gone. The byte order
// matches frame_assembler and is this design's choice. Reset is
// synchronous.
module frame_serializer #(
  parameter int unsigned FRAME_W = 48
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [FRAME_W-1:0] frame,
  input  logic               frame_valid,
  output logic               frame_ready,
  output logic [7:0]         out_data,
  output logic               out_valid,
  input  logic               out_ready
);
  localparam int unsigned NB = FRAME_W / 8;
  localparam int unsigned BW = $clog2(NB + 1);

  logic [FRAME_W-1:0] shreg;
  logic [BW-1:0]      left;     // bytes still to send

  assign frame_ready = (left == '0);
  assign out_valid   = (left != '0);
  assign out_data    = shreg[FRAME_W-1 -: 8];

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg <= '0;
      left  <= '0;
    end else if (frame_ready) begin
      if (frame_valid) begin
        shreg <= frame;
        left  <= BW'(NB);
      end
    end else if (out_ready) begin
      shreg <= shreg << 8;
      left  <= left - 1'b1;
    end
  end
endmodule
