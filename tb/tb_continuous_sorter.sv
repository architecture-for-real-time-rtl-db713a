// tb_continuous_sorter: runs the two-block continuous sorter at its
// default size (128 frames, 64 per batch) on a stream of batches.
//
// Batch b carries stamps drawn from 8 values starting at 1 + 5*b, so that
// neighbouring batches overlap but batch b lies wholly above batch b-2, the
// condition under which the scheme outputs a sorted stream. The expected
// output comes from a model of the two blocks: the new batch followed by
// the carried block is ordered with the reference sort, the lower half is
// expected at the output and the upper half is carried. The input is
// offered with random gaps and the output is randomly back-pressured.
// Checked: every output frame, the all-zero first batch, a sorted output
// stream, 770 clocks of sorting per batch, and that the input stall, the
// output back-pressure, a pending bank and a sort waiting for a bank all
// happened (the output is made slow for batches 4 to 7). Two final
// batches break the rule on purpose, with stamps 1..8 again: the output
// still matches the model frame for frame, and must now contain stamps
// lower than ones already sent, which shows the rule is needed.
`timescale 1ns/1ps
module tb_continuous_sorter;
  import tb_ref_pkg::*;
  localparam int HALF = 64, NB = 12, NV = 2;  // NV batches break the rule
  logic clk = 0, rst = 1;
  logic [47:0] in_frame = 0, out_frame;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, sorting, batch_done;
  int checks = 0, failures = 0;
  int stalls = 0, backpressure = 0, zeros = 0, batches = 0, nout = 0;
  int sort_cycles = 0, inversions = 0;
  logic [7:0] last_ts = 0;
  frame_q_t expq;

  continuous_sorter dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // During batches 4..7 the output is slow (ready one clock in 64), so
  // finished banks pile up and a sort has to wait for a bank to drain.
  bit slow = 0;
  int bank_waits = 0, pending = 0;
  always @(negedge clk) if (!rst) out_ready <= slow ? (($urandom() % 64) == 0) : (($urandom() % 4) != 0);

  // Monitors, sampled at the clock edge.
  always @(posedge clk) if (!rst) begin
    if (in_valid && !in_ready) stalls++;
    if (out_valid && !out_ready) backpressure++;
    if (sorting) sort_cycles++;
    if (int'(dut.state) == 1 && dut.fill_cnt == 7'(HALF) && !dut.sbank_free) bank_waits++;
    if (dut.pend && dut.emit_busy) pending++;
    if (batch_done) begin
      batches++;
      check(sort_cycles == 2 * 256 + 2 * 128 + 2, $sformatf("sort time %0d", sort_cycles));
      sort_cycles = 0;
    end
    if (out_valid && out_ready) begin
      check(nout < expq.size() && out_frame == expq[nout],
            $sformatf("out %0d got %h exp %h", nout, out_frame, (nout < expq.size()) ? expq[nout] : 48'h0));
      if (nout < NB * HALF)
        check(ts_of(out_frame) >= last_ts, $sformatf("out %0d stamp order", nout));
      else if (ts_of(out_frame) < last_ts) inversions++;
      last_ts = ts_of(out_frame);
      if (out_frame == '0) zeros++;
      nout++;
    end
  end

  initial begin
    frame_q_t carried, batch, all, srt;
    for (int i = 0; i < HALF; i++) carried.push_back('0);
    // Reference output for all batches.
    for (int b = 0; b < NB + NV; b++) begin
      batch = {};
      for (int i = 0; i < HALF; i++)
        batch.push_back(mk_frame((b < NB) ? 8'(1 + 5 * b + $urandom() % 8) : 8'(1 + $urandom() % 8)));
      all = {batch, carried};
      srt = ref_sort(all);
      for (int i = 0; i < HALF; i++) expq.push_back(srt[i]);
      carried = srt[HALF:2*HALF-1];
      // Drive this batch.
      if (b == 0) begin repeat (3) @(posedge clk); rst = 0; end
      slow = (b >= 4 && b < 8);
      foreach (batch[i]) begin
        @(negedge clk);
        while (($urandom() % 3) == 0) @(negedge clk);
        in_frame = batch[i]; in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
      end
    end
    wait (nout == (NB + NV) * HALF);
    repeat (20) @(posedge clk);
    check(nout == (NB + NV) * HALF, "output count");
    check(batches == NB + NV, $sformatf("batches %0d", batches));
    check(zeros == HALF, $sformatf("zero frames from the initial second block: %0d", zeros));
    check(stalls > 0, "input stall seen");
    check(backpressure > 0, "output back-pressure seen");
    check(bank_waits > 0, "sort waited for a bank still being sent");
    check(pending > 0, "finished bank waited while another was sent");
    check(inversions > 0, "breaking the batch rule gives out-of-order output");
    $display("stalls=%0d backpressure=%0d bank_waits=%0d pending=%0d batches=%0d zeros=%0d inversions=%0d", stalls, backpressure, bank_waits, pending, batches, zeros, inversions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
