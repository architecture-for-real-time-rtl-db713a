// hex_text_decoder: builds frames from hexadecimal text typed on a
// terminal.
//
// Each received byte that is a hexadecimal digit (0-9, A-F, a-f) is
// shifted into the frame as one nibble, most significant first; every
// other character (spaces, ';', line ends) is ignored. After FRAME_W/4
// digits (12 for a 48-bit frame) the frame is offered on frame_valid and
// held until frame_ready; no byte is taken meanwhile. So the line
// "FF4B; FF4A; FF44;" gives the frame FF4B_FF4A_FF44. Both sides use a
// valid/ready handshake. The text layout of three 16-bit words follows
// the terminal listing of the original prototype; the rule of ignoring
// every non-digit is this design's own. Reset is synchronous.
module hex_text_decoder #(
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
  localparam int unsigned ND = FRAME_W / 4;
  localparam int unsigned DW = $clog2(ND + 1);

  logic [DW-1:0] ndig;
  logic          is_hex;
  logic [3:0]    nib;

  // ASCII hexadecimal digit to its value.
  always_comb begin
    is_hex = 1'b1;
    nib    = '0;
    if (in_data >= "0" && in_data <= "9")      nib = 4'(in_data - "0");
    else if (in_data >= "A" && in_data <= "F") nib = 4'(in_data - "A" + 8'd10);
    else if (in_data >= "a" && in_data <= "f") nib = 4'(in_data - "a" + 8'd10);
    else                                       is_hex = 1'b0;
  end

  assign in_ready = !frame_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      ndig        <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      if (frame_valid && frame_ready) frame_valid <= 1'b0;
      if (in_valid && in_ready && is_hex) begin
        frame <= {frame[FRAME_W-5:0], nib};
        if (ndig == DW'(ND - 1)) begin
          ndig        <= '0;
          frame_valid <= 1'b1;
        end else ndig <= ndig + 1'b1;
      end
    end
  end
endmodule
