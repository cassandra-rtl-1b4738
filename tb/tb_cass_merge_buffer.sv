// tb_cass_merge_buffer -- random per-type bit strings are appended; every written block
// must equal the next 1024 bits of that type's model queue, in order, with back-pressure on
// the output and a final flush of the partial blocks.
`timescale 1ns/1ps
module tb_cass_merge_buffer;
  import cass_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, in_ready, flush, flushed, blk_valid, blk_ready;
  logic [4:0][1023:0] pay;
  logic [4:0][10:0] plen;
  stream_e blk_type;
  logic [1023:0] blk_data;
  logic [4:0][15:0] blk_cnt;
  bit q[5][$];
  int nblk[5];
  int checks = 0, failures = 0;

  cass_merge_buffer #(.BLK(1024)) dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && blk_valid && blk_ready) begin
    int t;
    t = int'(blk_type);
    checks++;
    for (int b = 0; b < 1024; b++) begin
      bit e;
      e = (q[t].size() > 0) ? q[t].pop_front() : 1'b0;
      if (blk_data[b] !== e) begin
        failures++; if (failures < 10) $display("type %0d block %0d bit %0d", t, nblk[t], b);
      end
    end
    nblk[t]++;
  end

  initial begin
    start = 0; in_valid = 0; flush = 0; blk_ready = 0; pay = '0; plen = '0;
    for (int t = 0; t < 5; t++) nblk[t] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    start = 1; @(negedge clk); start = 0;
    for (int it = 0; it < 300; it++) begin
      pay = '0;
      for (int t = 0; t < 5; t++) begin
        plen[t] = 11'($urandom_range(0, 1024));
        for (int b = 0; b < int'(plen[t]); b++) pay[t][b] = 1'($urandom);
      end
      in_valid = 1;
      blk_ready = $urandom_range(0, 1);
      while (!in_ready) begin @(negedge clk); blk_ready = $urandom_range(0, 1); end
      @(posedge clk);
      for (int t = 0; t < 5; t++) for (int b = 0; b < int'(plen[t]); b++) q[t].push_back(pay[t][b]);
      @(negedge clk);
      in_valid = 0;
    end
    flush = 1; @(negedge clk); flush = 0;
    blk_ready = 1;
    repeat (20) @(negedge clk);
    checks++; if (!flushed) failures++;
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (q[t].size() != 0 || int'(blk_cnt[t]) != nblk[t]) begin
        failures++; $display("type %0d: %0d bits left, count %0d vs %0d", t, q[t].size(), blk_cnt[t], nblk[t]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
