// hex_text_encoder: prints each sorted frame as a line of hexadecimal
// text for a terminal.
//
// A 48-bit frame is sent as its three 16-bit words, most significant
// first, each as four upper-case hexadecimal digits followed by ';', the
// words separated by one space, and the line ended by carriage return and
// line feed: "FF41; FF41; FF5A;\r\n", 19 characters. This is the layout
// of the sorted listing shown on the terminal of the original prototype;
// the line ending is this design's choice. For other widths there are
// FRAME_W/16 words. A frame is taken on frame_valid/frame_ready when the
// previous line is complete; characters leave on out_data/out_valid/
// out_ready (valid/ready, transfer when both are high); all characters
// are 7-bit ASCII, so out_data[7] is always 0. Reset is synchronous.
module hex_text_encoder #(
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
  localparam int unsigned NW   = FRAME_W / 16;        // words per line
  localparam int unsigned NCH  = NW * 6 - 1 + 2;      // characters per line
  localparam int unsigned CW   = $clog2(NCH + 1);

  logic [FRAME_W-1:0] shreg;   // next digit in the top nibble
  logic [CW-1:0]      pos;     // character index within the line
  logic               busy;
  logic [2:0]         col;     // 0..3 digit, 4 ';', 5 space

  assign frame_ready = !busy;
  assign out_valid   = busy;

  // Character at position pos.
  always_comb begin
    logic [3:0] nib;
    nib      = shreg[FRAME_W-1 -: 4];
    out_data = " ";
    if (pos == CW'(NCH - 2))      out_data = 8'h0D;
    else if (pos == CW'(NCH - 1)) out_data = 8'h0A;
    else if (col < 3'd4)          out_data = (nib < 4'd10) ? 8'h30 + {4'h0, nib}    // '0'..'9'
                                                           : 8'h37 + {4'h0, nib};   // 'A'..'F'
    else if (col == 3'd4)         out_data = ";";
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg <= '0;
      pos   <= '0;
      col   <= '0;
      busy  <= 1'b0;
    end else if (!busy) begin
      if (frame_valid) begin
        shreg <= frame;
        pos   <= '0;
        col   <= '0;
        busy  <= 1'b1;
      end
    end else if (out_ready) begin
      if (col < 3'd4) shreg <= shreg << 4;
      col <= (col == 3'd5) ? 3'd0 : col + 1'b1;
      if (pos == CW'(NCH - 1)) busy <= 1'b0;
      else pos <= pos + 1'b1;
    end
  end
endmodule
