// tb_cass_unary_decoder -- random test of parallel unary decoding.
// Random code sequences (ranks up to 31, often crossing 8-bit chunk borders) are packed into
// a 32-bit window, partly cut by `nbits`; the decoded ranks, end positions and count are
// compared with the sequence that was packed.
`timescale 1ns/1ps
module tb_cass_unary_decoder;
  logic [31:0]      win;
  logic [5:0]       nbits, ncodes;
  logic [31:0][4:0] rank, endpos;
  int checks = 0, failures = 0;

  cass_unary_decoder #(.EXPW(32)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int r[$], e[$], pos, nb, exp_n;
      r.delete(); e.delete();
      win = '0; pos = 0;
      while (1) begin
        int rr;
        case ($urandom_range(0, 3))
          0: rr = $urandom_range(0, 31);
          1: rr = $urandom_range(5, 20);
          default: rr = $urandom_range(0, 3);
        endcase
        if (pos + rr + 1 > 32) break;
        pos += rr;
        win[pos] = 1'b1;
        r.push_back(rr); e.push_back(pos);
        pos++;
      end
      // open codeword tail: zeros stay zero
      nb = (it % 4 == 0) ? $urandom_range(0, 32) : 32;
      nbits = 6'(nb);
      #1;
      exp_n = 0;
      for (int c = 0; c < r.size(); c++) if (e[c] < nb) exp_n++;
      checks++;
      if (int'(ncodes) != exp_n) begin
        failures++;
        if (failures < 10) $display("win=%b nb=%0d: %0d codes, expected %0d", win, nb, ncodes, exp_n);
      end
      for (int c = 0; c < exp_n; c++) begin
        checks++;
        if (int'(rank[c]) != r[c] || int'(endpos[c]) != e[c]) begin
          failures++;
          if (failures < 10) $display("win=%b code %0d: rank %0d end %0d, expected %0d %0d", win, c, rank[c], endpos[c], r[c], e[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
