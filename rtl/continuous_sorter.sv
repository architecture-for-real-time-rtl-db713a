// continuous_sorter: sorts an endless stream of frames by time stamp with
// a fixed buffer of N_KEYS frames.
//
// The key buffer (N_KEYS frames) is split in two blocks. The first block,
// entries 0..N_KEYS/2-1, takes N_KEYS/2 new frames from the input. The
// second block, entries N_KEYS/2..N_KEYS-1, holds the upper half of the
// previous sort; after reset it holds all-zero frames. When the first
// block is full, the whole buffer is sorted by counting_sort into a sorted
// array D (entries 0..N_KEYS-1 hold the algorithm's D[1..N]). The upper
// half of D is then written back into the second block, and the lower
// half is sent to the output. Provided every time stamp of batch i is
// larger than every time stamp of batch i-2, the output is in time-stamp
// order; the first N_KEYS/2 outputs are the zero frames of the initial
// second block. This two-block flow and the zero initialisation follow the
// original architecture.
//
// D has two banks, each a RAM of N_KEYS frames. A sort writes one bank
// and the write-back reads it; the lower half of that bank is then sent
// out while the next batch fills and is sorted into the other bank. A sort
// waits only if the bank it would overwrite is still being sent. With
// input and output running at the same frame rate (the serial system) the
// sorter therefore never falls behind, and the input is held up only for
// the sort and write-back, not for the output. The bank pair is this
// design's own; the original describes a single sorted array.
//
// Phases, after reset: INIT (N_KEYS/2 clocks, zero the second block),
// then repeatedly FILL (accept N_KEYS/2 frames), SORT (2*2^TS_W +
// 2*N_KEYS + 4 clocks) and BACK (N_KEYS/2 + 1 clocks of write-back).
// in_ready is high only in FILL while the first block has room: the input
// stalls in the other phases. The output sends at most one frame per two
// clocks and holds a frame while out_ready is low; a finished bank that
// cannot be sent yet waits as pending. Both ports use valid/ready
// (transfer when both are high); the handshakes and phase timing are this
// design's own. batch_done pulses as each write-back ends. Reset is
// synchronous, active high.
module continuous_sorter #(
  parameter int unsigned FRAME_W = 48,
  parameter int unsigned TS_LSB  = 16,
  parameter int unsigned TS_W    = 8,
  parameter int unsigned N_KEYS  = 128,
  localparam int unsigned AW     = $clog2(N_KEYS),
  localparam int unsigned HALF   = N_KEYS / 2
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [FRAME_W-1:0] in_frame,
  input  logic               in_valid,
  output logic               in_ready,
  output logic [FRAME_W-1:0] out_frame,
  output logic               out_valid,
  input  logic               out_ready,
  output logic               sorting,
  output logic               batch_done
);
  typedef enum logic [1:0] {INIT, FILL, SORT, BACK} state_t;
  state_t state;

  logic [AW:0]   fill_cnt;   // frames in the first block (zeroed in INIT)
  logic [AW:0]   back_cnt;   // write-back read index
  logic          back_vld;   // the sort bank's read data is to be written back
  logic [AW-1:0] back_addr;  // its key-buffer address
  logic          sbank;      // bank the next sort writes
  logic          start;

  // Output side: one bank being sent, possibly one more waiting.
  logic          emit_busy;
  logic          ebank;      // bank being sent
  logic [AW:0]   emit_left;  // frames of it still to read
  logic [AW-1:0] emit_idx;
  logic          emit_rd;    // the bank's read data is to be sent
  logic          pend;       // a finished bank waits to be sent (bank !ebank)

  // Key buffer.
  logic               a_we;
  logic [AW-1:0]      a_waddr, a_raddr;
  logic [FRAME_W-1:0] a_wdata, a_rdata;
  // Sorted array, two banks.
  logic               s_we;
  logic [AW-1:0]      s_waddr;
  logic [FRAME_W-1:0] s_wdata;
  logic [1:0]         d_we;
  logic [AW-1:0]      d_raddr [2];
  logic [FRAME_W-1:0] d_rdata [2];

  sdp_ram #(.W(FRAME_W), .DEPTH(N_KEYS)) u_key_buf (
    .clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata),
    .raddr(a_raddr), .rdata(a_rdata));

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sdp_ram #(.W(FRAME_W), .DEPTH(N_KEYS)) u_sorted (
      .clk, .we(d_we[b]), .waddr(s_waddr), .wdata(s_wdata),
      .raddr(d_raddr[b]), .rdata(d_rdata[b]));
  end

  counting_sort #(.FRAME_W(FRAME_W), .TS_LSB(TS_LSB), .TS_W(TS_W), .N(N_KEYS)) u_sort (
    .clk, .rst, .start, .busy(sorting), .done(),
    .a_raddr, .a_rdata,
    .d_we(s_we), .d_waddr(s_waddr), .d_wdata(s_wdata));

  assign d_we[0] = s_we && !sbank;
  assign d_we[1] = s_we &&  sbank;

  // Each bank is read either by the write-back (bank sbank, in BACK) or by
  // the output (bank ebank); the two never coincide, see the sort-start
  // condition below.
  always_comb begin
    for (int b = 0; b < 2; b++)
      d_raddr[b] = (state == BACK && sbank == 1'(b)) ? AW'(HALF) + back_cnt[AW-1:0]
                                                     : emit_idx;
  end

  assign in_ready = (state == FILL) && (fill_cnt < (AW+1)'(HALF));

  // Key-buffer write port: zero fill, new frames, or write-back.
  always_comb begin
    a_we    = 1'b0;
    a_waddr = '0;
    a_wdata = '0;
    unique case (state)
      INIT: begin
        a_we    = 1'b1;
        a_waddr = AW'(HALF) + fill_cnt[AW-1:0];
      end
      FILL: begin
        a_we    = in_valid && in_ready;
        a_waddr = fill_cnt[AW-1:0];
        a_wdata = in_frame;
      end
      BACK: begin
        a_we    = back_vld;
        a_waddr = back_addr;
        a_wdata = d_rdata[sbank];
      end
      default: ;
    endcase
  end

  // The bank the next sort writes is free unless it is being sent.
  logic sbank_free;
  assign sbank_free = !(emit_busy && ebank == sbank) && !(pend && ebank != sbank);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= INIT;
      fill_cnt   <= '0;
      back_cnt   <= '0;
      back_vld   <= 1'b0;
      back_addr  <= '0;
      sbank      <= 1'b0;
      start      <= 1'b0;
      batch_done <= 1'b0;
      emit_busy  <= 1'b0;
      ebank      <= 1'b1;       // the first bank sent is bank 0
      emit_left  <= '0;
      emit_idx   <= '0;
      emit_rd    <= 1'b0;
      pend       <= 1'b0;
      out_valid  <= 1'b0;
      out_frame  <= '0;
    end else begin
      start      <= 1'b0;
      batch_done <= 1'b0;
      back_vld   <= 1'b0;
      unique case (state)
        INIT: begin
          if (fill_cnt == (AW+1)'(HALF - 1)) begin
            fill_cnt <= '0;
            state    <= FILL;
          end else fill_cnt <= fill_cnt + 1'b1;
        end
        FILL: begin
          if (in_valid && in_ready) fill_cnt <= fill_cnt + 1'b1;
          if (fill_cnt == (AW+1)'(HALF) && sbank_free) begin
            state <= SORT;
            start <= 1'b1;
          end
        end
        SORT: begin
          if (!start && !sorting) begin
            state    <= BACK;
            back_cnt <= '0;
          end
        end
        BACK: begin
          if (back_cnt < (AW+1)'(HALF)) begin
            back_cnt  <= back_cnt + 1'b1;
            back_vld  <= 1'b1;
            back_addr <= AW'(HALF) + back_cnt[AW-1:0];
          end else begin
            state      <= FILL;
            fill_cnt   <= '0;
            sbank      <= !sbank;
            batch_done <= 1'b1;
            pend       <= 1'b1;       // bank sbank is ready to be sent
          end
        end
        default: state <= INIT;
      endcase

      // Output: send the lower half of a finished bank.
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (emit_rd) begin
        out_frame <= d_rdata[ebank];
        out_valid <= 1'b1;
        emit_rd   <= 1'b0;
        emit_idx  <= emit_idx + 1'b1;
        if (emit_left == '0) emit_busy <= 1'b0;
      end else if (emit_busy && emit_left != '0 && (!out_valid || out_ready)) begin
        emit_rd   <= 1'b1;
        emit_left <= emit_left - 1'b1;
      end else if (!emit_busy && pend) begin
        emit_busy <= 1'b1;
        ebank     <= !ebank;
        emit_left <= (AW+1)'(HALF);
        emit_idx  <= '0;
        pend      <= 1'b0;
      end
    end
  end

  // The input is never written while the buffer is being sorted.
  assert property (@(posedge clk) disable iff (rst) sorting |-> !a_we)
    else $error("continuous_sorter: key buffer written during a sort");
  // A sort never overwrites a bank that is being sent.
  assert property (@(posedge clk) disable iff (rst) s_we |-> !(emit_busy && ebank == sbank))
    else $error("continuous_sorter: sorted bank overwritten while being sent");
endmodule
