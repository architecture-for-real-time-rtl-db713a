// tb_counting_sort: checks the counting-sort engine.
//
// Two instances run from memory models of the key buffer and the sorted
// array. The first has N = 6 and sorts the six 48-bit frames of the
// original prototype's printed example; its expected output is the
// printed sorted list, taken directly (equal stamps 4A leave in reverse
// order). The second has the default N = 128 and sorts random frames,
// with many equal stamps, several times against the reference model.
// A third instance with 3-bit keys and N = 6 runs the worked example of
// the algorithm, A = [0,5,2,2,7,4]: its counter array must hold the counts
// B = [1,0,2,0,1,1,0,1] after counting and the positions
// C = [1,1,3,3,4,5,5,6] after the prefix sum, and the keys must come out
// as 0,2,2,4,5,7. All check the sort time of 2*2^k + 2*N + 2 clocks.
`timescale 1ns/1ps
module tb_counting_sort;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- N = 6: the printed example ----
  logic s_start = 0, s_busy, s_done, s_dwe;
  logic [2:0] s_araddr, s_dwaddr;
  logic [47:0] s_ardata, s_dwdata;
  logic [47:0] s_a [6];
  logic [47:0] s_d [6];
  counting_sort #(.FRAME_W(48), .TS_LSB(16), .TS_W(8), .N(6)) dut_small (
    .clk, .rst, .start(s_start), .busy(s_busy), .done(s_done),
    .a_raddr(s_araddr), .a_rdata(s_ardata),
    .d_we(s_dwe), .d_waddr(s_dwaddr), .d_wdata(s_dwdata));
  always @(posedge clk) begin
    s_ardata <= s_a[s_araddr];
    if (s_dwe) s_d[s_dwaddr] <= s_dwdata;
  end

  // ---- N = 128: random ----
  logic b_start = 0, b_busy, b_done, b_dwe;
  logic [6:0] b_araddr, b_dwaddr;
  logic [47:0] b_ardata, b_dwdata;
  logic [47:0] b_a [128];
  logic [47:0] b_d [128];
  int b_writes;
  counting_sort dut_big (
    .clk, .rst, .start(b_start), .busy(b_busy), .done(b_done),
    .a_raddr(b_araddr), .a_rdata(b_ardata),
    .d_we(b_dwe), .d_waddr(b_dwaddr), .d_wdata(b_dwdata));
  always @(posedge clk) begin
    b_ardata <= b_a[b_araddr];
    if (b_dwe) begin b_d[b_dwaddr] <= b_dwdata; b_writes++; end
  end

  // ---- k = 3, N = 6: the worked example of the algorithm ----
  logic k_start = 0, k_busy, k_done, k_dwe;
  logic [2:0] k_araddr, k_dwaddr;
  logic [47:0] k_ardata, k_dwdata;
  logic [47:0] k_a [6];
  logic [47:0] k_d [6];
  counting_sort #(.FRAME_W(48), .TS_LSB(16), .TS_W(3), .N(6)) dut_k3 (
    .clk, .rst, .start(k_start), .busy(k_busy), .done(k_done),
    .a_raddr(k_araddr), .a_rdata(k_ardata),
    .d_we(k_dwe), .d_waddr(k_dwaddr), .d_wdata(k_dwdata));
  always @(posedge clk) begin
    k_ardata <= k_a[k_araddr];
    if (k_dwe) k_d[k_dwaddr] <= k_dwdata;
  end

  initial begin
    int a_ex [6] = '{0, 5, 2, 2, 7, 4};
    int b_ex [8] = '{1, 0, 2, 0, 1, 1, 0, 1};
    int c_ex [8] = '{1, 1, 3, 3, 4, 5, 5, 6};
    int s_ex [6] = '{0, 2, 2, 4, 5, 7};
    int kc;
    foreach (a_ex[i]) k_a[i] = {16'h0, 8'(i), 5'h0, 3'(a_ex[i]), 16'h0};
    @(negedge rst);
    @(negedge clk); k_start = 1; @(negedge clk); k_start = 0;
    kc = 1;
    // The last count is written 2^3 + 6 + 1 clocks after start is taken,
    // the last position 2^3 clocks later.
    while (kc < 8 + 8) begin @(negedge clk); kc++; end
    foreach (b_ex[j]) check(int'(dut_k3.cnt[j]) == b_ex[j], $sformatf("B[%0d] = %0d", j, dut_k3.cnt[j]));
    while (kc < 8 + 8 + 8) begin @(negedge clk); kc++; end
    foreach (c_ex[j]) check(int'(dut_k3.cnt[j]) == c_ex[j], $sformatf("C[%0d] = %0d", j, dut_k3.cnt[j]));
    while (k_busy) begin @(negedge clk); kc++; end
    check(kc - 1 == 2 * 8 + 2 * 6 + 2, $sformatf("k=3 sort time %0d", kc - 1));
    foreach (s_ex[i]) check(int'(k_d[i][18:16]) == s_ex[i], $sformatf("k=3 D[%0d] = %0d", i + 1, k_d[i][18:16]));
    // The two 2s: the later one (A[3]) must come first.
    check(k_d[1][31:24] == 8'd3 && k_d[2][31:24] == 8'd2, "k=3 equal keys in reverse order");
  end

  initial begin
    frame_q_t in_q, exp_q;
    int cyc;
    // Input of the printed example, three 16-bit words per frame.
    s_a = '{48'hFF4B_FF4A_FF44, 48'hFF46_FF48_FF53, 48'hFF41_FF4A_FF46,
            48'hFF48_FF49_FF46, 48'hFF41_FF41_FF5A, 48'hFF5A_FF5A_FF5A};
    foreach (s_d[i]) s_d[i] = '0;
    repeat (3) @(posedge clk); rst = 0;
    @(negedge clk); s_start = 1; @(negedge clk); s_start = 0;
    cyc = 1;
    while (s_busy) begin @(negedge clk); cyc++; end
    check(cyc - 1 == 2 * 256 + 2 * 6 + 2, $sformatf("N=6 sort time %0d", cyc - 1));
    // Sorted output as printed.
    check(s_d[0] == 48'hFF41_FF41_FF5A, "printed row 1");
    check(s_d[1] == 48'hFF46_FF48_FF53, "printed row 2");
    check(s_d[2] == 48'hFF48_FF49_FF46, "printed row 3");
    check(s_d[3] == 48'hFF41_FF4A_FF46, "printed row 4");
    check(s_d[4] == 48'hFF4B_FF4A_FF44, "printed row 5");
    check(s_d[5] == 48'hFF5A_FF5A_FF5A, "printed row 6");

    for (int run = 0; run < 4; run++) begin
      in_q = {};
      for (int i = 0; i < 128; i++) begin
        // run 0: full key range; later runs: few keys, many ties;
        // run 3: every stamp equal.
        logic [7:0] ts;
        ts = (run == 0) ? 8'($urandom()) : (run == 3) ? 8'hFF : 8'(($urandom() % 9) * 29);
        b_a[i] = mk_frame(ts);
        in_q.push_back(b_a[i]);
        b_d[i] = '0;
      end
      exp_q = ref_sort(in_q);
      b_writes = 0;
      @(negedge clk); b_start = 1; @(negedge clk); b_start = 0;
      cyc = 1;
      while (b_busy) begin @(negedge clk); cyc++; end
      check(cyc - 1 == 2 * 256 + 2 * 128 + 2, $sformatf("N=128 sort time %0d", cyc - 1));
      check(b_writes == 128, $sformatf("writes %0d", b_writes));
      for (int i = 0; i < 128; i++)
        check(b_d[i] == exp_q[i], $sformatf("run %0d pos %0d got %h exp %h", run, i, b_d[i], exp_q[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
