// tb_cass_exp_sel -- exponent compression and truncation of random kept lists in both
// schemes, against the reference model's codebook ranks and MX magnitudes; also the miss
// flag for an exponent outside the table.
`timescale 1ns/1ps
module tb_cass_exp_sel;
  import cass_pkg::*;
  import cass_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cb_wr_en;
  logic [4:0] cb_wr_idx;
  logic [7:0] cb_wr_exp;
  cmode_e mode;
  bf16_t [31:0] kept;
  logic [5:0] k;
  logic [31:0][5:0] clen;
  logic [7:0] shexp;
  logic [31:0][4:0] spm_el;
  logic [31:0][3:0] vlo_el;
  logic miss;
  int checks = 0, failures = 0;

  cass_exp_sel #(.N(32), .NSYM(32), .TRUNC(4)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cb_wr_en = 0; cb_wr_idx = 0; cb_wr_exp = 0; mode = MODE_C1; kept = '0; k = 0;
    default_cbook();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); cb_wr_en = 1; cb_wr_idx = 5'(r); cb_wr_exp = cbook[r];
    end
    @(negedge clk); cb_wr_en = 0;
    for (int it = 0; it < 1000; it++) begin
      logic [15:0] v[T];
      logic [7:0] sh;
      logic [31:0] keep;
      bit c2;
      c2 = it[0];
      mode = c2 ? MODE_C2 : MODE_C1;
      k = 6'($urandom_range(0, 32));
      keep = '0;
      for (int i = 0; i < 32; i++) begin
        v[i] = rand_val();
        kept[i] = v[i];
        keep[i] = (i < int'(k));
      end
      if (it % 50 == 7) begin kept[0] = 16'h0a00; v[0] = 16'h0a00; end  // exponent 20: not in table
      #1;
      sh = shared_exp(v, keep);
      if (c2) begin checks++; if (shexp !== sh) failures++; end
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (i >= int'(k)) begin
          if (clen[i] != 0 || spm_el[i] != 0 || vlo_el[i] != 0) failures++;
        end else if (c2) begin
          logic [7:0] m;
          m = mx_mag(v[i], sh);
          if (spm_el[i] !== {v[i][15], m[7:4]} || vlo_el[i] !== m[3:0]) failures++;
        end else begin
          int r;
          r = rank_of(v[i][14:7]);
          if ((r >= 0 && int'(clen[i]) != r + 1) || spm_el[i] !== {1'b0, v[i][15], v[i][6:4]} ||
              vlo_el[i] !== v[i][3:0]) begin
            failures++;
            if (failures < 10) $display("lane %0d: clen %0d rank %0d", i, clen[i], r);
          end
        end
      end
      checks++;
      if (miss !== (!c2 && it % 50 == 7 && k != 0)) begin
        failures++; $display("it %0d miss %0d", it, miss);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
