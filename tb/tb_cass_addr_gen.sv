// tb_cass_addr_gen -- field layout of random tiles against a serial bit packer, and the
// per-type block address counters.
`timescale 1ns/1ps
module tb_cass_addr_gen;
  import cass_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, emit;
  logic [4:0][16:0] base, next_addr;
  stream_e emit_type;
  cmode_e mode;
  logic [31:0] bitmap;
  logic [5:0] k;
  logic [31:0][5:0] clen;
  logic [7:0] shexp;
  logic [31:0][4:0] spm_el;
  logic [31:0][3:0] vlo_el;
  bf16_t [31:0] pruned;
  logic [4:0][1023:0] pay;
  logic [4:0][10:0] plen;
  int checks = 0, failures = 0;

  cass_addr_gen #(.N(32), .NSYM(32), .TRUNC(4), .BLK(1024), .AW(17)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt[5];
    start = 0; emit = 0; emit_type = ST_BMP; base = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      bit q[5][$];
      bit c2;
      for (int t = 0; t < 5; t++) q[t].delete();
      c2 = it[0];
      mode = c2 ? MODE_C2 : MODE_C1;
      k = 6'($urandom_range(0, 32));
      bitmap = $urandom; shexp = 8'($urandom);
      clen = '0; spm_el = '0; vlo_el = '0; pruned = '0;
      for (int i = 0; i < int'(k); i++) begin
        clen[i] = 6'($urandom_range(1, 32));
        spm_el[i] = c2 ? 5'($urandom) : 5'($urandom_range(0, 15));
        vlo_el[i] = 4'($urandom);
      end
      for (int i = 0; i < 32 - int'(k); i++) pruned[i] = 16'($urandom);
      for (int b = 0; b < 32; b++) q[0].push_back(bitmap[b]);
      if (c2) for (int b = 0; b < 8; b++) q[1].push_back(shexp[b]);
      for (int i = 0; i < int'(k); i++) begin
        if (!c2) begin
          for (int z = 0; z < int'(clen[i]) - 1; z++) q[1].push_back(1'b0);
          q[1].push_back(1'b1);
        end
        for (int b = 0; b < (c2 ? 5 : 4); b++) q[2].push_back(spm_el[i][b]);
        for (int b = 0; b < 4; b++) q[3].push_back(vlo_el[i][b]);
      end
      for (int i = 0; i < 32 - int'(k); i++) for (int b = 0; b < 16; b++) q[4].push_back(pruned[i][b]);
      #1;
      for (int t = 0; t < 5; t++) begin
        checks++;
        if (int'(plen[t]) != q[t].size()) begin
          failures++; if (failures < 10) $display("it %0d type %0d len %0d vs %0d", it, t, plen[t], q[t].size());
        end
        for (int b = 0; b < 1024; b++)
          if (pay[t][b] !== ((b < q[t].size()) ? q[t][b] : 1'b0)) begin
            failures++; if (failures < 10) $display("it %0d type %0d bit %0d", it, t, b);
            break;
          end
      end
    end
    // address counters
    @(negedge clk);
    for (int t = 0; t < 5; t++) begin base[t] = 17'(100 * t + 5); cnt[t] = 0; end
    start = 1; @(negedge clk); start = 0;
    for (int it = 0; it < 200; it++) begin
      emit = $urandom_range(0, 1); emit_type = stream_e'($urandom_range(0, 4));
      @(negedge clk);
      if (emit) cnt[int'(emit_type)]++;
      emit = 0;
      for (int t = 0; t < 5; t++) begin
        checks++;
        if (int'(next_addr[t]) != 100 * t + 5 + cnt[t]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
