// sort_pkg: constants shared by the time-stamp sorter.
//
// A frame is FRAME_W = 48 bits wide. Its time stamp is the 8-bit field at
// bits 23:16; the other bits are payload that travels with the stamp.
// The sorter holds N_KEYS = 128 frames at a time. The system clock is
// 50 MHz and the serial link runs at 9600 bit/s, 8 data bits, no parity,
// 1 stop bit. All of these numbers are those of the original prototype;
// CLKS_PER_BIT is derived from the two rates and rounded down.
package sort_pkg;
  localparam int unsigned FRAME_W      = 48;
  localparam int unsigned TS_LSB       = 16;
  localparam int unsigned TS_W         = 8;
  localparam int unsigned N_KEYS       = 128;
  localparam int unsigned CLK_HZ       = 50_000_000;
  localparam int unsigned BAUD         = 9600;
  localparam int unsigned CLKS_PER_BIT = CLK_HZ / BAUD;
endpackage
