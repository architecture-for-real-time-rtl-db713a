// tb_frame_serializer: offers random frames with random gaps, applies
// random back-pressure on the byte side, and checks that each frame leaves
// as six bytes, most significant first, in order.
`timescale 1ns/1ps
module tb_frame_serializer;
  logic clk = 0, rst = 1;
  logic [47:0] frame = 0;
  logic frame_valid = 0, frame_ready, out_valid, out_ready = 0;
  logic [7:0] out_data;
  int checks = 0, failures = 0;
  logic [7:0] exp_bytes [$];
  int nbytes = 0;

  frame_serializer #(.FRAME_W(48)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) out_ready <= ($urandom() % 3) != 0;

  // Byte sink, sampled at the clock edge.
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (exp_bytes.size() == 0 || out_data !== exp_bytes[0]) begin
      failures++;
      if (failures < 5) $display("byte %0d got %h", nbytes, out_data);
    end
    if (exp_bytes.size() > 0) void'(exp_bytes.pop_front());
    nbytes++;
  end

  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      frame = {$urandom(), $urandom()}; frame_valid = 1;
      @(posedge clk);
      while (!frame_ready) @(posedge clk);
      for (int i = 5; i >= 0; i--) exp_bytes.push_back(frame[8*i +: 8]);
      @(negedge clk); frame_valid = 0;
      repeat ($urandom() % 4) @(negedge clk);
    end
    repeat (40) @(posedge clk);
    checks++;
    if (nbytes != 6 * 150) begin failures++; $display("byte count %0d", nbytes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
