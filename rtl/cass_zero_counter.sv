// cass_zero_counter -- parallel zero counter (one chunk of W bits).
//
// Bit 0 of `bits` is the first bit of the stream. Every stage j keeps a running count
// r_j: a zero increments it, a one resets it to zero. At a one the stage outputs
// r_{j-1}+1, i.e. the length of the unary codeword that this one terminates (number of
// preceding zeros plus the one); at a zero it outputs 0. Next to the per-position counts the
// counter gives the number of ones, the chunk's last bit and the running count left after
// the last bit (the zeros still open at the chunk's end).
// The stage structure (+1 adder, a mux that restarts the count at a one, a mux that outputs
// zero at a zero) and the printed example (inputs 0 0 1 1 0, outputs 0 0 3 1 0) follow the
// paper's figure. The figure feeds the first stage with the inverted last bit of the
// previous chunk; here the start value is a full count `cin` so the same counter also serves
// for carried zeros, and the decoder passes cin = 0 and fixes chunk borders in its
// reorganisation step. Purely combinational.
module cass_zero_counter #(
  parameter int unsigned W  = 8,     // chunk width (paper: 8)
  parameter int unsigned CW = 6      // count width
) (
  input  logic [W-1:0]              bits,
  input  logic [CW-1:0]             cin,       // zeros carried in before bit 0
  output logic [W-1:0][CW-1:0]      cnt,       // codeword length at each one, 0 elsewhere
  output logic [$clog2(W+1)-1:0]    num_ones,
  output logic                      last_bit,
  output logic [CW-1:0]             tail       // running zero count after bit W-1
);
  always_comb begin
    logic [CW-1:0] run;
    logic [CW-1:0] inc;
    run      = cin;
    num_ones = '0;
    for (int j = 0; j < W; j++) begin
      inc = run + CW'(1);
      if (bits[j]) begin
        cnt[j]   = inc;
        run      = '0;
        num_ones = num_ones + 1'b1;
      end else begin
        cnt[j]   = '0;
        run      = inc;
      end
    end
    tail     = run;
    last_bit = bits[W-1];
  end
endmodule
