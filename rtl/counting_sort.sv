// counting_sort: sorts N frames by their time stamp with a counting sort.
//
// The frames sit in an external RAM (the key buffer) that is read through
// a_raddr/a_rdata with one clock of latency; the sorted frames are written
// to a second RAM through d_we/d_waddr/d_wdata. d_wdata is a_rdata itself:
// a frame moves unchanged and only its address is computed. The key of a
// frame is its time-stamp field, frame[TS_LSB +: TS_W]. One array of 2^TS_W counters,
// read combinationally and written at the clock edge, serves as both the
// occurrence counts B and the positions C of the algorithm:
//
//   CLEAR  2^TS_W clocks  B[j] = 0 for every key value j
//   COUNT  N+1 clocks     B[key(A[i])] += 1, one frame per clock
//   PREFIX 2^TS_W clocks  C[j] = B[j] + C[j-1], a running sum
//   PLACE  N+1 clocks     D[C[key]] = A[i]; C[key] -= 1, one frame per clock
//
// C holds 1-based positions (the algorithm's D[1..N]); the write address
// is C[key]-1. Because placement walks A upward while C counts down, frames
// with equal stamps leave in the reverse of their buffer order, as in the
// original algorithm and its printed example. The four phases are the
// original algorithm; the single counter array, the one-frame-per-clock
// pipeline and the handshake are this design's own.
//
// Timing: start is sampled while idle; busy is high for exactly
// 2*2^TS_W + 2*N + 2 clocks (770 for N = 128, TS_W = 8) and done pulses
// for one clock as busy falls. Reset is synchronous.
module counting_sort #(
  parameter int unsigned FRAME_W = 48,
  parameter int unsigned TS_LSB  = 16,
  parameter int unsigned TS_W    = 8,
  parameter int unsigned N       = 128,
  localparam int unsigned AW     = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [AW-1:0]      a_raddr,
  input  logic [FRAME_W-1:0] a_rdata,
  output logic               d_we,
  output logic [AW-1:0]      d_waddr,
  output logic [FRAME_W-1:0] d_wdata
);
  localparam int unsigned NV = 1 << TS_W;          // number of key values
  localparam int unsigned CW = $clog2(N + 1);      // counter width
  localparam int unsigned IW = $clog2(((NV > N) ? NV : N) + 1);

  typedef enum logic [2:0] {IDLE, CLEAR, COUNT, PREFIX, PLACE} state_t;
  state_t        state;
  logic [IW-1:0] idx;        // key value (CLEAR, PREFIX) or frame index
  logic          rd_vld;     // a_rdata holds a frame read last clock
  logic [CW-1:0] acc;        // running sum of PREFIX

  logic [CW-1:0] cnt [NV];   // B, then C
  logic [TS_W-1:0] key;
  logic [TS_W-1:0] c_raddr;
  logic [CW-1:0]   c_rd;
  logic            c_we;
  logic [TS_W-1:0] c_waddr;
  logic [CW-1:0]   c_wdata;

  assign key     = a_rdata[TS_LSB +: TS_W];
  assign c_raddr = (state == PREFIX || state == CLEAR) ? idx[TS_W-1:0] : key;
  assign c_rd    = cnt[c_raddr];
  assign a_raddr = idx[AW-1:0];

  // Single write port of the counter array.
  always_comb begin
    c_we    = 1'b0;
    c_waddr = c_raddr;
    c_wdata = '0;
    unique case (state)
      CLEAR:  begin c_we = 1'b1; c_wdata = '0;                 end
      COUNT:  begin c_we = rd_vld; c_wdata = c_rd + 1'b1;      end
      PREFIX: begin c_we = 1'b1; c_wdata = acc + c_rd;         end
      PLACE:  begin c_we = rd_vld; c_wdata = c_rd - 1'b1;      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (c_we) cnt[c_waddr] <= c_wdata;
  end

  // Sorted output: the frame read last clock goes to position C[key]-1.
  assign d_we    = (state == PLACE) && rd_vld;
  assign d_waddr = AW'(c_rd - 1'b1);
  assign d_wdata = a_rdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= IDLE;
      idx    <= '0;
      rd_vld <= 1'b0;
      acc    <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: begin
          rd_vld <= 1'b0;
          if (start) begin
            state <= CLEAR;
            idx   <= '0;
            busy  <= 1'b1;
          end
        end
        CLEAR: begin
          if (idx == IW'(NV - 1)) begin
            state <= COUNT;
            idx   <= '0;
          end else idx <= idx + 1'b1;
        end
        COUNT, PLACE: begin
          if (idx < IW'(N)) begin
            rd_vld <= 1'b1;
            idx    <= idx + 1'b1;
          end else begin
            rd_vld <= 1'b0;
            idx    <= '0;
            acc    <= '0;
            if (state == COUNT) state <= PREFIX;
            else begin
              state <= IDLE;
              busy  <= 1'b0;
              done  <= 1'b1;
            end
          end
        end
        PREFIX: begin
          acc <= acc + c_rd;
          if (idx == IW'(NV - 1)) begin
            state <= PLACE;
            idx   <= '0;
          end else idx <= idx + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // A placement must never find an empty slot count.
  assert property (@(posedge clk) disable iff (rst)
                   (state == PLACE && rd_vld) |-> (c_rd != '0))
    else $error("counting_sort: position counter underflow");
endmodule
