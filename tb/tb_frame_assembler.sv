// tb_frame_assembler: feeds random bytes with random gaps and random
// back-pressure on the frame side, and checks that every six bytes come
// out as one 48-bit frame, most significant byte first, with no byte lost
// or taken while a frame is held.
`timescale 1ns/1ps
module tb_frame_assembler;
  logic clk = 0, rst = 1;
  logic [7:0] in_data = 0;
  logic in_valid = 0, in_ready, frame_valid, frame_ready = 0;
  logic [47:0] frame;
  int checks = 0, failures = 0, stalls = 0;
  logic [7:0] bytes [$];

  frame_assembler #(.FRAME_W(48)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (!rst) begin
    frame_ready <= ($urandom() % 3) != 0;
  end

  // Byte source.
  initial begin
    repeat (3) @(posedge clk); rst = 0;
    for (int n = 0; n < 6 * 200; n++) begin
      @(negedge clk);
      in_data = 8'($urandom()); in_valid = ($urandom() % 4) != 0;
      while (!in_valid) begin @(negedge clk); in_valid = ($urandom() % 4) != 0; end
      @(posedge clk);
      while (!in_ready) begin stalls++; @(posedge clk); end
      bytes.push_back(in_data);
      @(negedge clk); in_valid = 0;
    end
  end

  // Frame sink.
  initial begin
    logic [47:0] e;
    @(negedge rst);
    for (int f = 0; f < 200; f++) begin
      @(posedge clk);
      while (!(frame_valid && frame_ready)) @(posedge clk);
      #1;
      checks++;
      e = {bytes[0], bytes[1], bytes[2], bytes[3], bytes[4], bytes[5]};
      repeat (6) void'(bytes.pop_front());
      if (frame !== e) begin
        failures++;
        if (failures < 5) $display("frame %0d got %h exp %h", f, frame, e);
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no input stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
