// tb_fig6_workload: the six-frame example of the original prototype run
// through the whole serial sorter at its default size of 128 frames.
//
// The six frames (three 16-bit words each, stamp in the middle word's low
// byte: 4A, 48, 4A, 49, 41, 5A) open the first batch; 58 filler frames
// with stamps 0x60..0x7F complete it, and a second batch with stamps
// 0x80..0x9F pushes it out. The sorter emits the 64 zero frames of its
// initial second block, then the first batch in stamp order. Its first
// six frames must be the printed sorted list with one difference: the two
// frames with stamp 4A. A single counting-sort pass (the printed one-shot
// result) puts equal stamps in reverse order. Here the six frames pass
// through two sorts: the first moves them into the carried block, the
// second sends them out. Each pass reverses the pair, so they leave in
// arrival order. Only the serial bit time is shortened (16 clocks per
// bit); every other parameter is the default. As on the prototype's
// terminal, frames are typed and printed as text lines ("FF4B; FF4A;
// FF44;"), so the chip runs with text_mode high.
`timescale 1ns/1ps
module tb_fig6_workload;
  import tb_ref_pkg::*;
  localparam int CPB = 16, HALF = 64;
  logic clk = 0, rst = 1, uart_rxd = 1, text_mode = 1;
  logic uart_txd, rx_overrun, sorting, batch_done;
  int checks = 0, failures = 0, nout = 0, overruns = 0;
  frame_t outq [$];
  frame_t in6 [6] = '{48'hFF4B_FF4A_FF44, 48'hFF46_FF48_FF53, 48'hFF41_FF4A_FF46,
                      48'hFF48_FF49_FF46, 48'hFF41_FF41_FF5A, 48'hFF5A_FF5A_FF5A};
  // Printed sorted list, rows 4 and 5 (stamp 4A) exchanged, see above.
  frame_t out6 [6] = '{48'hFF41_FF41_FF5A, 48'hFF46_FF48_FF53, 48'hFF48_FF49_FF46,
                       48'hFF4B_FF4A_FF44, 48'hFF41_FF4A_FF46, 48'hFF5A_FF5A_FF5A};

  sort_system_top #(.P_CLKS_PER_BIT(CPB)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic send_byte(input logic [7:0] b);
    uart_rxd = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(posedge clk); end
    uart_rxd = 1; repeat (CPB) @(posedge clk);
  endtask

  function automatic string line_of(frame_t f);
    string s;
    s = $sformatf("%04h; %04h; %04h;\r\n", f[47:32], f[31:16], f[15:0]);
    return s.toupper();
  endfunction

  // Frames are typed as text lines, "FF4B; FF4A; FF44;" and CR LF.
  task automatic send_frame(input frame_t f);
    string s;
    s = line_of(f);
    for (int k = 0; k < s.len(); k++) send_byte(s[k]);
  endtask

  always @(posedge clk) if (!rst && rx_overrun) overruns++;

  // Serial sink: 19 characters per line; the line is checked against the
  // expected text and the frame is read back from its hex digits.
  string lines [$];
  initial begin
    logic [7:0]  b;
    logic [47:0] f;
    string       s;
    @(negedge rst);
    forever begin
      s = "";
      for (int k = 0; k < 19; k++) begin
        @(negedge uart_txd);
        repeat (CPB / 2) @(posedge clk);
        for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_txd; end
        repeat (CPB) @(posedge clk);
        s = {s, string'(b)};
      end
      f = {s.substr(0, 3).atohex()[15:0], s.substr(6, 9).atohex()[15:0], s.substr(12, 15).atohex()[15:0]};
      lines.push_back(s);
      outq.push_back(f);
      nout++;
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (200) @(posedge clk);
    foreach (in6[i]) send_frame(in6[i]);
    for (int i = 0; i < HALF - 6; i++) send_frame(mk_frame(8'(8'h60 + $urandom() % 32)));
    for (int i = 0; i < HALF; i++) send_frame(mk_frame(8'(8'h80 + $urandom() % 32)));
    wait (nout == 2 * HALF);
    for (int i = 0; i < HALF; i++) check(outq[i] == '0, $sformatf("zero frame %0d", i));
    for (int i = 0; i < 6; i++) begin
      check(outq[HALF + i] == out6[i], $sformatf("sorted row %0d got %h exp %h", i + 1, outq[HALF + i], out6[i]));
      check(lines[HALF + i] == line_of(out6[i]), $sformatf("sorted line %0d: %s", i + 1, lines[HALF + i]));
    end
    for (int i = HALF + 6; i < 2 * HALF; i++)
      check(ts_of(outq[i]) >= 8'h60 && ts_of(outq[i]) >= ts_of(outq[i-1]), $sformatf("filler %0d order", i));
    check(overruns == 0, "no receive overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
