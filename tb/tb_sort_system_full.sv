// tb_sort_system_full: end-to-end test of the serial sorter with every
// parameter at its default: 128 frames held (64 per batch), 50 MHz clock,
// 9600 bit/s. Two batches are sent in binary (128 frames, about 40 million clocks);
// the first 64 frames out are the zero frames of the initial second
// block, the next 64 are the first batch in stamp order. The test body is
// in tb_sys_body.svh. At this bit time a sort ends long before the next
// frame is complete, so the sorter input never stalls.
`timescale 1ns/1ps
module tb_sort_system_full;
  import tb_ref_pkg::*;
  localparam int CPB = 5208, NK = 128, NB = 2, MODES = 1, MIN_STALL = 0;

  sort_system_top dut (.*);

  initial begin
    #1500000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_sys_body.svh"
endmodule
