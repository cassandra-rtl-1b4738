// tb_cass_exp_lut -- codebook LUT: reset contents, writes, parallel reads and range misses.
`timescale 1ns/1ps
module tb_cass_exp_lut;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [4:0] wr_idx;
  logic [7:0] wr_exp;
  logic [3:0][5:0] rd_rank;
  logic [3:0][7:0] rd_exp;
  logic [3:0] miss;
  logic [7:0] model[32];
  int checks = 0, failures = 0;

  cass_exp_lut #(.NSYM(32), .NRD(4), .RW(6)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_idx = 0; wr_exp = 0; rd_rank = '0;
    for (int i = 0; i < 32; i++) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_idx = 5'($urandom); wr_exp = 8'($urandom);
      for (int p = 0; p < 4; p++) rd_rank[p] = 6'($urandom_range(0, 40));
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd_rank[p] < 32) begin
          if (rd_exp[p] !== model[rd_rank[p]] || miss[p]) failures++;
        end else if (!miss[p] || rd_exp[p] != 0) failures++;
      end
      @(posedge clk);
      if (wr_en) model[wr_idx] = wr_exp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
