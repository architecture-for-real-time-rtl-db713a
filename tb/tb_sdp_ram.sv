// tb_sdp_ram: checks the block RAM against an array model with random
// simultaneous writes and reads, including one-clock read latency and
// read-old-data when reading the address being written.
`timescale 1ns/1ps
module tb_sdp_ram;
  localparam int W = 48, DEPTH = 128, AW = 7;
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    // Initialise every word so that all reads are defined.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom(), $urandom()};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = ($urandom() % 2) == 1;
      waddr = AW'($urandom());
      raddr = (n % 5 == 0) ? waddr : AW'($urandom());
      wdata = {$urandom(), $urandom()};
      expect_q = model[raddr];           // old data on a collision
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("mismatch addr %0d got %h exp %h", raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
