// sort_system_top: single-chip real-time time-stamp sorter with serial
// input and output.
//
// Frames arrive on uart_rxd at 9600 bit/s 8-N-1 and leave sorted on
// uart_txd in the same format. Between the pins, continuous_sorter sorts
// them by the time stamp in bits 23:16 with a buffer of N_KEYS frames,
// emitting N_KEYS/2 frames for every N_KEYS/2 received, one batch behind;
// the first batch out is the N_KEYS/2 all-zero frames that fill its second
// block after reset.
//
// text_mode selects the byte format on both pins. Low: binary, six bytes
// per frame, most significant first (frame_assembler, frame_serializer).
// High: hexadecimal text as on a terminal, a frame typed as twelve hex
// digits with any separators and printed as "FF41; FF41; FF5A;" plus CR
// LF (hex_text_decoder, hex_text_encoder). text_mode should change only
// during reset or while no frame is in flight; the path not selected
// sees no valid and is not read.
//
// When the sorter stalls its input, the assembler or decoder holds a
// frame and stops taking bytes; a byte that then completes while the
// previous one is unread raises rx_overrun for one clock. At the default
// rates a sort and write-back (837 clocks) are far shorter than one byte
// (52,080 clocks), so no byte is lost.
//
// The chain keyboard -> RS232 -> sorting -> RS232 -> terminal and the
// text layout follow the original prototype, where a soft processor ran
// the sort in software; here the sort is a dedicated datapath, and the
// prototype's DIP-switch input is not provided. Reset is synchronous,
// active high.
module sort_system_top
  import sort_pkg::*;
#(
  parameter int unsigned P_FRAME_W      = FRAME_W,
  parameter int unsigned P_TS_LSB       = TS_LSB,
  parameter int unsigned P_TS_W         = TS_W,
  parameter int unsigned P_N_KEYS       = N_KEYS,
  parameter int unsigned P_CLKS_PER_BIT = CLKS_PER_BIT
) (
  input  logic clk,
  input  logic rst,
  input  logic text_mode,
  input  logic uart_rxd,
  output logic uart_txd,
  output logic rx_overrun,
  output logic sorting,
  output logic batch_done
);
  logic [7:0]           rx_data, tx_data, bin_data, txt_data;
  logic                 rx_valid, rx_ready, tx_valid, tx_ready;
  logic                 asm_ready, dec_ready, ser_valid, enc_valid;
  logic [P_FRAME_W-1:0] in_frame, out_frame, asm_frame, dec_frame;
  logic                 asm_valid, dec_valid, ser_ready, enc_ready;
  logic                 in_valid, in_ready, out_valid, out_ready;

  uart_rx #(.CLKS_PER_BIT(P_CLKS_PER_BIT)) u_rx (
    .clk, .rst, .rxd(uart_rxd),
    .data(rx_data), .valid(rx_valid), .ready(rx_ready), .overrun(rx_overrun));

  // Receive side: binary or text framing.
  frame_assembler #(.FRAME_W(P_FRAME_W)) u_asm (
    .clk, .rst,
    .in_data(rx_data), .in_valid(rx_valid && !text_mode), .in_ready(asm_ready),
    .frame(asm_frame), .frame_valid(asm_valid), .frame_ready(in_ready && !text_mode));

  hex_text_decoder #(.FRAME_W(P_FRAME_W)) u_dec (
    .clk, .rst,
    .in_data(rx_data), .in_valid(rx_valid && text_mode), .in_ready(dec_ready),
    .frame(dec_frame), .frame_valid(dec_valid), .frame_ready(in_ready && text_mode));

  assign rx_ready = text_mode ? dec_ready : asm_ready;
  assign in_frame = text_mode ? dec_frame : asm_frame;
  assign in_valid = text_mode ? dec_valid : asm_valid;

  continuous_sorter #(.FRAME_W(P_FRAME_W), .TS_LSB(P_TS_LSB), .TS_W(P_TS_W),
                      .N_KEYS(P_N_KEYS)) u_sorter (
    .clk, .rst,
    .in_frame, .in_valid, .in_ready,
    .out_frame, .out_valid, .out_ready,
    .sorting, .batch_done);

  // Transmit side: binary or text.
  frame_serializer #(.FRAME_W(P_FRAME_W)) u_ser (
    .clk, .rst,
    .frame(out_frame), .frame_valid(out_valid && !text_mode), .frame_ready(ser_ready),
    .out_data(bin_data), .out_valid(ser_valid), .out_ready(tx_ready && !text_mode));

  hex_text_encoder #(.FRAME_W(P_FRAME_W)) u_enc (
    .clk, .rst,
    .frame(out_frame), .frame_valid(out_valid && text_mode), .frame_ready(enc_ready),
    .out_data(txt_data), .out_valid(enc_valid), .out_ready(tx_ready && text_mode));

  assign out_ready = text_mode ? enc_ready : ser_ready;
  assign tx_data   = text_mode ? txt_data : bin_data;
  assign tx_valid  = text_mode ? enc_valid : ser_valid;

  uart_tx #(.CLKS_PER_BIT(P_CLKS_PER_BIT)) u_tx (
    .clk, .rst, .data(tx_data), .valid(tx_valid), .ready(tx_ready), .txd(uart_txd));
endmodule
