// tb_hex_text: checks the hexadecimal text encoder and decoder.
//
// The encoder prints random frames under random back-pressure; each line
// must equal the string formatted independently here ("%04h; %04h;
// %04h;" in upper case, and CR LF). The decoder is fed the six input lines of the
// original prototype's terminal listing, then random frames typed in
// lower case with arbitrary separators, and must return the frames.
`timescale 1ns/1ps
module tb_hex_text;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---- encoder ----
  logic [47:0] e_frame = 0;
  logic e_fvalid = 0, e_fready, e_ovalid, e_oready = 0;
  logic [7:0] e_odata;
  string e_exp = "";
  int e_pos = 0, e_lines = 0;
  hex_text_encoder #(.FRAME_W(48)) u_enc (
    .clk, .rst, .frame(e_frame), .frame_valid(e_fvalid), .frame_ready(e_fready),
    .out_data(e_odata), .out_valid(e_ovalid), .out_ready(e_oready));

  always @(negedge clk) if (!rst) e_oready <= ($urandom() % 3) != 0;
  always @(posedge clk) if (!rst && e_ovalid && e_oready) begin
    check(e_pos < e_exp.len() && e_odata == e_exp[e_pos],
          $sformatf("encoder char %0d got %h", e_pos, e_odata));
    e_pos++;
    if (e_odata == 8'h0A) e_lines++;
  end

  initial begin
    string line;
    @(negedge rst);
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      e_frame = {16'($urandom()), $urandom()};
      e_fvalid = 1;
      @(posedge clk);
      while (!e_fready) @(posedge clk);
      line = $sformatf("%04h; %04h; %04h;\r\n", e_frame[47:32], e_frame[31:16], e_frame[15:0]);
      e_exp = {e_exp, line.toupper()};
      @(negedge clk); e_fvalid = 0;
    end
  end

  // ---- decoder ----
  logic [7:0] d_idata = 0;
  logic d_ivalid = 0, d_iready, d_fvalid, d_fready = 0;
  logic [47:0] d_frame;
  logic [47:0] d_exp [$];
  int d_got = 0;
  hex_text_decoder #(.FRAME_W(48)) u_dec (
    .clk, .rst, .in_data(d_idata), .in_valid(d_ivalid), .in_ready(d_iready),
    .frame(d_frame), .frame_valid(d_fvalid), .frame_ready(d_fready));

  always @(negedge clk) if (!rst) d_fready <= ($urandom() % 4) == 0;
  always @(posedge clk) if (!rst && d_fvalid && d_fready) begin
    check(d_exp.size() > 0 && d_frame == d_exp[0], $sformatf("decoder frame %0d got %h", d_got, d_frame));
    if (d_exp.size() > 0) void'(d_exp.pop_front());
    d_got++;
  end

  task automatic type_str(input string s);
    for (int i = 0; i < s.len(); i++) begin
      @(negedge clk);
      d_idata = s[i]; d_ivalid = 1;
      @(posedge clk);
      while (!d_iready) @(posedge clk);
      @(negedge clk); d_ivalid = 0;
    end
  endtask

  initial begin
    string lines [6] = '{"FF4B; FF4A; FF44;\r\n", "FF46; FF48; FF53;\r\n", "FF41; FF4A; FF46;\r\n",
                         "FF48; FF49; FF46;\r\n", "FF41; FF41; FF5A;\r\n", "FF5A; FF5A; FF5A;\r\n"};
    logic [47:0] f;
    repeat (3) @(posedge clk); rst = 0;
    d_exp = '{48'hFF4B_FF4A_FF44, 48'hFF46_FF48_FF53, 48'hFF41_FF4A_FF46,
              48'hFF48_FF49_FF46, 48'hFF41_FF41_FF5A, 48'hFF5A_FF5A_FF5A};
    foreach (lines[i]) type_str(lines[i]);
    for (int n = 0; n < 20; n++) begin
      f = {16'($urandom()), $urandom()};
      d_exp.push_back(f);
      type_str($sformatf("%04x,%04x %04x\n", f[47:32], f[31:16], f[15:0]));
    end
    repeat (50) @(posedge clk);
    check(d_got == 26, $sformatf("decoder frames %0d", d_got));
    wait (e_lines == 40);
    repeat (10) @(posedge clk);
    check(e_pos == 40 * 19, $sformatf("encoder characters %0d", e_pos));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
