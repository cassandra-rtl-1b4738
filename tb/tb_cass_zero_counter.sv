// tb_cass_zero_counter -- exhaustive test of the parallel zero counter.
// All 256 chunks with several carried counts; expected values come from a serial walk of
// the bits. Also checks the worked example of the paper's figure (0 0 1 1 0 -> 0 0 3 1 0).
`timescale 1ns/1ps
module tb_cass_zero_counter;
  logic [7:0]      bits;
  logic [5:0]      cin;
  logic [7:0][5:0] cnt;
  logic [3:0]      num_ones;
  logic            last_bit;
  logic [5:0]      tail;
  int checks = 0, failures = 0;

  cass_zero_counter #(.W(8), .CW(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) begin
      for (int v = 0; v < 256; v++) begin
        int run, ones;
        bits = 8'(v); cin = 6'(c * 5);
        #1;
        run = c * 5; ones = 0;
        for (int j = 0; j < 8; j++) begin
          int e;
          if (bits[j]) begin e = run + 1; run = 0; ones++; end
          else begin e = 0; run++; end
          checks++;
          if (int'(cnt[j]) != e) begin
            failures++;
            if (failures < 10) $display("bits=%b cin=%0d pos %0d: %0d vs %0d", bits, cin, j, cnt[j], e);
          end
        end
        checks++;
        if (int'(num_ones) != ones || last_bit != bits[7] || int'(tail) != run) failures++;
      end
    end
    // figure example: stream 0,0,1,1,0 after a chunk that ended in a one
    bits = 8'b000_01100; cin = 0; #1;
    checks++;
    if (cnt[0] != 0 || cnt[1] != 0 || cnt[2] != 3 || cnt[3] != 1 || cnt[4] != 0) begin
      failures++; $display("figure example mismatch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
