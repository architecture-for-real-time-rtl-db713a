// Body shared by the end-to-end testbenches of sort_system_top. The
// including module declares CPB (clocks per bit), NK (frames held by the
// sorter), NB (batches sent per pass), MODES (1: a binary pass only;
// 2: a binary pass, then a reset and a text pass), MIN_STALL (sorter input
// stall clocks the run must show) and the instance `dut` with ports clk,
// rst, text_mode, uart_rxd, uart_txd, rx_overrun, sorting, batch_done.
//
// In each pass a serial source sends NB batches of NK/2 frames back to
// back with no idle time: in binary, six bytes per frame, most significant
// first; in text, the line "XXXX; XXXX; XXXX;" plus CR LF. Batch b draws
// its stamps from 8 values starting at 1 + 5*b (neighbouring batches
// overlap, batch b lies above batch b-2). A serial sink decodes uart_txd
// and compares every frame, and in text mode every character of its line,
// with a model of the two-block scheme (new batch plus carried block,
// ordered by the reference sort, lower half out, upper half carried).
// Counted and required per pass: the all-zero first batch, one write-back
// per batch, frames with equal stamps, a sorted output stream, no receive
// overrun; over the run: MIN_STALL stall clocks and both modes if MODES=2.
  localparam int HALF = NK / 2;
  logic clk = 0, rst = 1, uart_rxd = 1, text_mode = 0;
  logic uart_txd, rx_overrun, sorting, batch_done;
  int checks = 0, failures = 0;
  int nout = 0, zeros = 0, batches = 0, stalls = 0, overruns = 0, tie_pairs = 0;
  int passes_bin = 0, passes_txt = 0;
  logic [7:0] last_ts = 0;
  logic [47:0] last_frame = 0;
  frame_q_t expq;
  logic [7:0] rxq [$];     // bytes decoded from uart_txd

  always #10 clk = ~clk;   // 50 MHz

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

  always @(posedge clk) if (!rst) begin
    if (rx_overrun) overruns++;
    if (batch_done) batches++;
    if (dut.u_sorter.in_valid && !dut.u_sorter.in_ready) stalls++;
  end

  // Line receiver: every byte on uart_txd goes to rxq.
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); b[i] = uart_txd; end
      repeat (CPB) @(posedge clk);
      check(uart_txd == 1'b1, "stop bit");
      rxq.push_back(b);
    end
  end

  // Frame checker.
  initial begin
    logic [47:0] f;
    string s;
    forever begin
      wait (rxq.size() >= (text_mode ? 19 : 6));
      if (text_mode) begin
        s = "";
        for (int k = 0; k < 19; k++) s = {s, string'(rxq.pop_front())};
        check(nout < expq.size() && s == line_of(expq[nout]), $sformatf("text line %0d: %s", nout, s));
        f = (nout < expq.size()) ? expq[nout] : '1;
      end else begin
        for (int k = 0; k < 6; k++) f = {f[39:0], rxq.pop_front()};
        check(nout < expq.size() && f == expq[nout],
              $sformatf("frame %0d got %h exp %h", nout, f, (nout < expq.size()) ? expq[nout] : 48'h0));
      end
      check(ts_of(f) >= last_ts, $sformatf("frame %0d out of stamp order", nout));
      if (f == '0) zeros++;
      if (nout > 0 && f != '0 && ts_of(f) == ts_of(last_frame)) tie_pairs++;
      last_ts = ts_of(f);
      last_frame = f;
      nout++;
    end
  end

  task automatic run_pass(input bit text);
    frame_q_t carried, batch, all, srt;
    string s;
    rst = 1;
    text_mode = text;
    repeat (5) @(posedge clk);
    expq = {}; rxq = {};
    nout = 0; zeros = 0; batches = 0; overruns = 0; tie_pairs = 0; last_ts = 0;
    rst = 0;
    for (int i = 0; i < HALF; i++) carried.push_back('0);
    repeat (NK * 2) @(posedge clk);   // let the second block be zeroed
    for (int b = 0; b < NB; b++) begin
      batch = {};
      for (int i = 0; i < HALF; i++) batch.push_back(mk_frame(8'(1 + 5 * b + $urandom() % 8)));
      all = {batch, carried};
      srt = ref_sort(all);
      for (int i = 0; i < HALF; i++) expq.push_back(srt[i]);
      carried = srt[HALF:2*HALF-1];
      foreach (batch[i]) begin
        if (text) begin
          s = line_of(batch[i]);
          for (int k = 0; k < s.len(); k++) send_byte(s[k]);
        end else
          for (int k = 5; k >= 0; k--) send_byte(batch[i][8*k +: 8]);
      end
    end
    wait (nout == NB * HALF);
    repeat (20 * CPB) @(posedge clk);
    check(nout == NB * HALF, $sformatf("frames out %0d", nout));
    check(zeros == HALF, $sformatf("zero frames of the initial second block: %0d", zeros));
    check(batches == NB, $sformatf("write-backs %0d", batches));
    check(tie_pairs > 0, "equal stamps seen at the output");
    check(overruns == 0, $sformatf("receive overruns %0d", overruns));
    $display("%s pass: frames=%0d zeros=%0d writebacks=%0d tie_pairs=%0d overruns=%0d",
             text ? "text" : "binary", nout, zeros, batches, tie_pairs, overruns);
    if (text) passes_txt++; else passes_bin++;
  endtask

  initial begin
    run_pass(1'b0);
    if (MODES == 2) run_pass(1'b1);
    check(stalls >= MIN_STALL, $sformatf("sorter input stall clocks %0d", stalls));
    check(passes_bin == 1 && passes_txt == MODES - 1, "passes in each mode");
    $display("stall clocks=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
