// tb_cass_region_table -- random range tables and addresses against a first-match model.
`timescale 1ns/1ps
module tb_cass_region_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_valid, wr_cass;
  logic [1:0] wr_idx;
  logic [16:0] wr_base, wr_limit;
  logic [2:0][16:0] q_addr;
  logic [2:0] q_cass;
  bit mv[4], mc[4];
  int mb[4], ml[4];
  int checks = 0, failures = 0;

  cass_region_table #(.NREG(4), .AW(17), .NQ(3)) dut (.*);

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_idx = 0; wr_valid = 0; wr_cass = 0; wr_base = 0; wr_limit = 0; q_addr = '0;
    for (int r = 0; r < 4; r++) begin mv[r] = 0; mc[r] = 0; mb[r] = 0; ml[r] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      if (it % 10 == 0) begin
        wr_en = 1; wr_idx = 2'($urandom); wr_valid = ($urandom_range(0, 4) != 0);
        wr_cass = 1'($urandom); wr_base = 17'($urandom_range(0, 100000));
        wr_limit = 17'(int'(wr_base) + $urandom_range(0, 30000));
        @(negedge clk); wr_en = 0;
        mv[wr_idx] = wr_valid; mc[wr_idx] = wr_cass; mb[wr_idx] = wr_base; ml[wr_idx] = wr_limit;
      end
      for (int q = 0; q < 3; q++) q_addr[q] = 17'($urandom_range(0, 131071));
      if (it % 10 == 0) begin            // range edges of the entry just written
        q_addr[0] = wr_base; q_addr[1] = wr_limit; q_addr[2] = wr_limit - 17'd1;
      end
      #1;
      for (int q = 0; q < 3; q++) begin
        bit e, f;
        e = 0; f = 0;
        for (int r = 0; r < 4; r++)
          if (!f && mv[r] && int'(q_addr[q]) >= mb[r] && int'(q_addr[q]) < ml[r]) begin f = 1; e = mc[r]; end
        checks++;
        if (q_cass[q] !== e) begin failures++; if (failures < 10) $display("it %0d addr %0d got %b", it, q_addr[q], q_cass[q]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
