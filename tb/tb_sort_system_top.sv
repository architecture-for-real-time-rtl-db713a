// tb_sort_system_top: end-to-end test of the serial sorter at reduced
// size: 16 frames held (8 per batch), 8 clocks per serial bit, 10
// batches per pass, first in binary and then, after a reset, in
// hexadecimal text. At this bit time a frame (480 clocks) arrives faster than a
// sort and write-back (about 560 clocks), so the next frame is held at the
// sorter input for a while, but no byte is lost. The test body is in
// tb_sys_body.svh.
`timescale 1ns/1ps
module tb_sort_system_top;
  import tb_ref_pkg::*;
  localparam int CPB = 8, NK = 16, NB = 10, MODES = 2, MIN_STALL = 1;

  sort_system_top #(.P_N_KEYS(NK), .P_CLKS_PER_BIT(CPB)) dut (.*);

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_sys_body.svh"
endmodule
