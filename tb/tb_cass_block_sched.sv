// tb_cass_block_sched -- random buffer levels; every read must be of a type that still has
// blocks, whose level is at most 1024 bits and that was not read in the previous cycle, at
// that type's next address; a read must be offered whenever some type qualifies; skip counts
// must match; draft jobs never read the two target-only types; all blocks get read.
`timescale 1ns/1ps
module tb_cass_block_sched;
  import cass_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, job_full, rd_valid, busy, done;
  logic [4:0][16:0] base;
  logic [4:0][15:0] nblk, skip_cnt;
  logic [4:0][11:0] level;
  logic [16:0] rd_addr;
  stream_e rd_type;
  int checks = 0, failures = 0;

  cass_block_sched #(.BLK(1024), .THRESH(1024), .AW(17), .LW(12)) dut (.*);

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; job_full = 0; base = '0; nblk = '0; level = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int job = 0; job < 60; job++) begin
      int cnt[5], skips[5], prev, ndone, cyc;
      bit full;
      full = job[0];
      for (int t = 0; t < 5; t++) begin
        base[t] = 17'($urandom_range(0, 60000)); nblk[t] = 16'($urandom_range(0, 12));
        cnt[t] = 0; skips[t] = 0;
      end
      job_full = full; start = 1;
      @(negedge clk); start = 0;
      prev = -1; ndone = 0; cyc = 0;
      while (busy && cyc < 2000) begin
        bit any;
        any = 0;
        for (int t = 0; t < 5; t++) level[t] = 12'($urandom_range(0, 2048));
        #1;
        for (int t = 0; t < 5; t++) begin
          bit want;
          want = (full || t < 3) && cnt[t] < int'(nblk[t]);
          if (want && level[t] > 1024) skips[t]++;
          if (want && level[t] <= 1024 && t != prev) any = 1;
        end
        checks++;
        if (rd_valid !== any) begin failures++; if (failures < 10) $display("job %0d cyc %0d valid %b exp %b", job, cyc, rd_valid, any); end
        if (rd_valid) begin
          int t;
          t = int'(rd_type);
          checks++;
          if (!(full || t < 3) || cnt[t] >= int'(nblk[t]) || level[t] > 1024 || t == prev ||
              rd_addr !== 17'(int'(base[t]) + cnt[t])) begin
            failures++; if (failures < 10) $display("job %0d bad read type %0d addr %0d", job, t, rd_addr);
          end
          cnt[t]++;
          prev = t;
        end else prev = -1;
        @(negedge clk);
        cyc++;
      end
      for (int t = 0; t < 5; t++) begin
        checks += 2;
        if (cnt[t] != ((full || t < 3) ? int'(nblk[t]) : 0)) begin failures++; $display("job %0d type %0d read %0d of %0d", job, t, cnt[t], nblk[t]); end
        if (int'(skip_cnt[t]) != skips[t]) begin failures++; $display("job %0d type %0d skips %0d vs %0d", job, t, skip_cnt[t], skips[t]); end
      end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
