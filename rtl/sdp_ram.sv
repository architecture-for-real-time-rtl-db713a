// sdp_ram: simple dual-port synchronous RAM, the on-chip block RAM of the
// sorter.
//
// One write port and one read port, both on the same clock. A write takes
// effect at the clock edge; a read returns the word at raddr one clock
// later (registered output, as a block RAM). Reading and writing the same
// address in one cycle returns the old word. Contents are not reset.
// DEPTH defaults to the 128 frames of the sorter's key buffer and W to the
// 48-bit frame width; the port structure is this design's choice.
module sdp_ram #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
