// tb_cass_bitonic_sorter -- random and structured key sets must come out in descending
// order as a permutation of the input.
`timescale 1ns/1ps
module tb_cass_bitonic_sorter;
  logic [31:0][19:0] keys, sorted;
  int checks = 0, failures = 0;

  cass_bitonic_sorter #(.N(32), .KW(20)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 1000; it++) begin
      int cnt_in[int], cnt_out[int];
      cnt_in.delete(); cnt_out.delete();
      for (int i = 0; i < 32; i++)
        case (it % 4)
          0: keys[i] = 20'($urandom);
          1: keys[i] = 20'(i);                   // ascending input
          2: keys[i] = 20'(31 - i);              // already sorted
          default: keys[i] = 20'($urandom_range(0, 3));  // many equal keys
        endcase
      #1;
      for (int i = 0; i < 32; i++) begin
        cnt_in[int'(keys[i])]++;
        cnt_out[int'(sorted[i])]++;
      end
      for (int i = 1; i < 32; i++) begin
        checks++;
        if (sorted[i] > sorted[i-1]) failures++;
      end
      checks++;
      if (cnt_in != cnt_out) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
