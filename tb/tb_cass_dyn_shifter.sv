// tb_cass_dyn_shifter -- the dynamic shifter against an arithmetic reference.
// Cassandra-2: for every 8-bit magnitude and a range of shared exponents, the rebuilt BF16
// value must equal magnitude * 2^(shared-7-127) exactly (checked via real arithmetic), or
// zero where it underflows. Cassandra-1: the fields are passed through.
`timescale 1ns/1ps
module tb_cass_dyn_shifter;
  import cass_pkg::*;
  cmode_e mode;
  logic sign;
  logic [7:0] exp;
  logic [7:0] mant;
  bf16_t value;
  int checks = 0, failures = 0;

  cass_dyn_shifter dut (.*);

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real bf2real(bf16_t v);
    real r;
    if (v[14:7] == 0) return 0.0;
    r = (1.0 + real'(v[6:0]) / 128.0) * pow2(int'(v[14:7]) - 127);
    return v[15] ? -r : r;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MODE_C2;
    for (int e = 0; e < 256; e += 3) for (int m = 0; m < 256; m++) begin
      real want;
      mode = MODE_C2; sign = m[0]; exp = 8'(e); mant = 8'(m);
      #1;
      want = real'(m) * pow2(e - 7 - 127);
      if (sign) want = -want;
      checks++;
      if (m == 0 || (8 - $clog2(m + 1)) >= e) begin
        if (value[14:0] != 0 || value[15] != sign) begin
          failures++;
          if (failures < 4) $display("e=%0d m=%0d: %h, expected zero mode=%0d dutmode=%0d lz=%0d", e, m, value, mode, dut.mode, dut.zc_ones);
        end
      end else if (bf2real(value) != want) begin
        failures++;
        if (failures < 10) $display("e=%0d m=%0d: %h (%f) vs %f", e, m, value, bf2real(value), want);
      end
    end
    mode = MODE_C1;
    for (int it = 0; it < 500; it++) begin
      sign = 1'($urandom); exp = 8'($urandom); mant = 8'($urandom);
      #1;
      checks++;
      if (value !== {sign, exp, mant[6:0]}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
