// tb_cass_mant_concat -- exhaustive test of the mantissa concatenator in both schemes and
// both read kinds.
`timescale 1ns/1ps
module tb_cass_mant_concat;
  import cass_pkg::*;
  cmode_e mode;
  logic full;
  logic [3:0] hi, lo;
  logic [7:0] mant;
  int checks = 0, failures = 0;

  cass_mant_concat #(.TRUNC(4)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) for (int f = 0; f < 2; f++)
      for (int h = 0; h < 16; h++) for (int l = 0; l < 16; l++) begin
        logic [7:0] e;
        mode = cmode_e'(m); full = f[0]; hi = 4'(h); lo = 4'(l);
        #1;
        if (m == 1) e = 8'(h * 16 + (f ? l : 0));
        else        e = 8'((h % 8) * 16 + (f ? l : 0));
        checks++;
        if (mant !== e) begin
          failures++;
          if (failures < 10) $display("mode %0d full %0d hi %h lo %h: %h vs %h", m, f, h, l, mant, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
