// tb_cass_prefix_sum -- random bitmaps against a serial count.
`timescale 1ns/1ps
module tb_cass_prefix_sum;
  logic [31:0] bitmap;
  logic [31:0][5:0] excl;
  logic [5:0] total;
  int checks = 0, failures = 0;

  cass_prefix_sum #(.N(32)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int acc;
      bitmap = (it == 0) ? '0 : (it == 1) ? '1 : $urandom;
      #1;
      acc = 0;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (int'(excl[i]) != acc) failures++;
        acc += int'(bitmap[i]);
      end
      checks++;
      if (int'(total) != acc) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
