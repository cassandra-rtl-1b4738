// tb_cass_format_splitter -- top-k split of random tiles. The sorted keys are produced by a
// simple sort in the testbench; bitmap, kept list and pruned list are compared with the
// reference model's top-k and a serial packing.
`timescale 1ns/1ps
module tb_cass_format_splitter;
  import cass_pkg::*;
  import cass_ref_pkg::*;
  bf16_t [31:0] vals, kept, pruned;
  logic [31:0][19:0] sorted;
  logic [5:0] k;
  logic [31:0] bitmap;
  int checks = 0, failures = 0;

  cass_format_splitter #(.N(32), .KW(20)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    default_cbook();
    for (int it = 0; it < 1000; it++) begin
      logic [15:0] v[T];
      logic [19:0] ks[32];
      logic [31:0] keep;
      int nk, np;
      for (int i = 0; i < 32; i++) begin
        v[i] = rand_val();
        if (it % 3 == 0 && i % 4 == 0) v[i] = v[0];
        vals[i] = v[i];
        ks[i] = {v[i][14:0], ~5'(i)};
      end
      ks.rsort();
      for (int i = 0; i < 32; i++) sorted[i] = ks[i];
      k = 6'($urandom_range(0, 32));
      #1;
      keep = topk(v, int'(k));
      checks++;
      if (bitmap !== keep) begin
        failures++; if (failures < 10) $display("bitmap %h vs %h", bitmap, keep);
      end
      nk = 0; np = 0;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (keep[i]) begin if (kept[nk] !== v[i]) failures++; nk++; end
        else begin if (pruned[np] !== v[i]) failures++; np++; end
      end
      for (int i = nk; i < 32; i++) begin checks++; if (kept[i] != 0) failures++; end
      for (int i = np; i < 32; i++) begin checks++; if (pruned[i] != 0) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
