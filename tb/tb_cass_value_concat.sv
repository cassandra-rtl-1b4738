// tb_cass_value_concat -- de-sparsification of random bitmaps, draft and target.
`timescale 1ns/1ps
module tb_cass_value_concat;
  import cass_pkg::*;
  logic [31:0] bitmap;
  logic full;
  bf16_t [31:0] kept, pruned, dense;
  int checks = 0, failures = 0;

  cass_value_concat #(.N(32)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int nk, np;
      bitmap = (it < 2) ? {32{it[0]}} : $urandom;
      full = it[1];
      for (int i = 0; i < 32; i++) begin
        kept[i] = 16'h1000 + 16'(i);      // tagged so positions are visible
        pruned[i] = 16'h2000 + 16'(i);
      end
      #1;
      nk = 0; np = 0;
      for (int i = 0; i < 32; i++) begin
        logic [15:0] e;
        if (bitmap[i]) begin e = 16'h1000 + 16'(nk); nk++; end
        else begin e = full ? 16'h2000 + 16'(np) : 16'h0; np++; end
        checks++;
        if (dense[i] !== e) begin
          failures++;
          if (failures < 10) $display("bitmap %h full %0d pos %0d: %h vs %h", bitmap, full, i, dense[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
