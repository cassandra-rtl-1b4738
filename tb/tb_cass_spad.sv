// tb_cass_spad -- random writes and multi-port reads against an associative model
// (small instance; one-cycle read latency, read-before-write on the same word).
`timescale 1ns/1ps
module tb_cass_spad;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [9:0] wr_addr;
  logic [127:0] wr_data;
  logic [3:0] rd_en;
  logic [3:0][9:0] rd_addr;
  logic [3:0][127:0] rd_data;
  logic [127:0] m [bit [9:0]];
  logic [3:0][127:0] exp_d;
  logic [3:0] exp_v;
  int checks = 0, failures = 0;

  cass_spad #(.WORDS(1024), .BLK(128), .NRD(4)) dut (.*);

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; wr_data = 0; rd_addr = '0; exp_v = '0;
    // fill
    for (int a = 0; a < 1024; a++) begin
      wr_en = 1; wr_addr = 10'(a); wr_data = {$urandom, $urandom, $urandom, $urandom};
      m[wr_addr] = wr_data;
      @(negedge clk);
    end
    for (int it = 0; it < 5000; it++) begin
      wr_en = 1'($urandom); wr_addr = 10'($urandom); wr_data = {$urandom, $urandom, $urandom, $urandom};
      rd_en = 4'($urandom);
      for (int p = 0; p < 4; p++) begin
        rd_addr[p] = ($urandom_range(0, 3) == 0) ? wr_addr : 10'($urandom);
        if (rd_en[p]) exp_d[p] = m[rd_addr[p]];
      end
      exp_v = rd_en;
      @(negedge clk);
      if (wr_en) m[wr_addr] = wr_data;
      for (int p = 0; p < 4; p++) if (exp_v[p]) begin
        checks++;
        if (rd_data[p] !== exp_d[p]) begin failures++; if (failures < 10) $display("it %0d port %0d", it, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
