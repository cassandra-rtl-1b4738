// tb_cass_stream_buf -- bit FIFO against a queue model.
// Random pushes of 1024-bit blocks (only while at most 1024 bits are held, as the
// scheduler does) and random pops; the window, level and order of bits must match a
// bit-queue model. Uses a 512-bit window.
`timescale 1ns/1ps
module tb_cass_stream_buf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, push;
  logic [1023:0] push_data;
  logic [9:0] pop_n;
  logic [11:0] level;
  logic [511:0] win;
  bit q[$];
  int checks = 0, failures = 0;
  int pushes = 0;

  cass_stream_buf #(.BLK(1024), .CAP(2048), .WIN(512)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; push = 0; push_data = '0; pop_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (int'(level) != q.size()) begin
        failures++; if (failures < 10) $display("level %0d vs %0d", level, q.size());
      end
      for (int b = 0; b < 512; b++) begin
        if (b < q.size() && win[b] !== q[b]) begin
          failures++; if (failures < 10) $display("it %0d win bit %0d", it, b);
          break;
        end
      end
      checks++;
      // next stimulus
      push = (q.size() <= 1024) && ($urandom_range(0, 2) == 0);
      for (int w = 0; w < 32; w++) push_data[w*32 +: 32] = $urandom;
      pop_n = 10'($urandom_range(0, (q.size() < 512) ? q.size() : 512));
      if (it == 2000) begin clr = 1; push = 0; pop_n = 0; end else clr = 0;
      @(posedge clk);
      if (clr) q.delete();
      else begin
        for (int b = 0; b < int'(pop_n); b++) void'(q.pop_front());
        if (push) begin
          for (int b = 0; b < 1024; b++) q.push_back(push_data[b]);
          pushes++;
        end
      end
    end
    checks++; if (pushes < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
