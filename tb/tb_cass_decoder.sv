// tb_cass_decoder -- self-checking test of one Cassandra decoder.
//
// For each of the four read kinds (Cassandra-1/2, draft/target) a reference model encodes
// random tiles with random keep counts into the five streams; the testbench then feeds the
// blocks the way the memory controller does (a type only while its buffer holds at most
// 128 bytes, one block per cycle), and compares every decoded value with the reference.
// It also checks the codebook-miss error flag.
`timescale 1ns/1ps
module tb_cass_decoder;
  import cass_pkg::*;
  import cass_ref_pkg::*;

  localparam int NT = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, job_full, busy, done, lut_wr_en, blk_valid, out_valid, out_ready, err;
  cmode_e job_mode;
  logic [15:0] job_ntiles;
  logic [4:0] lut_wr_idx;
  logic [7:0] lut_wr_exp;
  stream_e blk_type;
  logic [1023:0] blk_data;
  logic [NSTREAM-1:0][11:0] level;
  bf16_t [31:0] out_data;

  cass_decoder dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] tiles[NT][T];
  int          ks[NT];
  logic [31:0] keeps[NT];

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit c2, bit full);
    int sent[5], got, cyc;
    bit need[5];
    reset_streams();
    for (int n = 0; n < NT; n++) begin
      for (int i = 0; i < T; i++) tiles[n][i] = rand_val();
      ks[n] = (n % 6 == 0) ? ((n % 12 == 0) ? 0 : 32) : $urandom_range(10, 28);
      keeps[n] = encode_tile(tiles[n], ks[n], c2);
    end
    for (int t = 0; t < 5; t++) begin sent[t] = 0; need[t] = full || t < 3; end
    @(negedge clk);
    job_mode = c2 ? MODE_C2 : MODE_C1; job_full = full; job_ntiles = NT; start = 1;
    @(negedge clk); start = 0;
    got = 0; cyc = 0;
    while (got < NT && cyc < 20000) begin
      // feed: first type (fixed order) below the threshold with blocks left
      blk_valid = 0;
      for (int t = 0; t < 5; t++)
        if (!blk_valid && need[t] && sent[t] < nblocks(t) && level[t] <= 1024) begin
          blk_valid = 1; blk_type = stream_e'(t); blk_data = block(t, sent[t]); sent[t]++;
        end
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int i = 0; i < T; i++) begin
          logic [15:0] e;
          e = expect_val(tiles[got], keeps[got], c2, full, i);
          checks++;
          if (out_data[i] !== e) begin
            failures++;
            if (failures < 10) $display("c2=%0d full=%0d tile %0d val %0d: got %h exp %h (orig %h k=%0d)",
                                        c2, full, got, i, out_data[i], e, tiles[got][i], ks[got]);
          end
        end
        got++;
      end
      #1; cyc++;
      @(negedge clk);
    end
    blk_valid = 0;
    checks++; if (got != NT) begin failures++; $display("only %0d tiles", got); end
    repeat (2) @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy"); end
    checks++; if (err) begin failures++; $display("unexpected err"); end
  endtask

  initial begin
    start = 0; lut_wr_en = 0; blk_valid = 0; out_ready = 0; job_full = 0;
    job_mode = MODE_C1; job_ntiles = 0; lut_wr_idx = 0; lut_wr_exp = 0; blk_type = ST_BMP; blk_data = '0;
    default_cbook();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NSYM; r++) begin
      @(negedge clk); lut_wr_en = 1; lut_wr_idx = 5'(r); lut_wr_exp = cbook[r];
    end
    @(negedge clk); lut_wr_en = 0;
    for (int cfg = 0; cfg < 4; cfg++) run(cfg[1], !cfg[0]);
    // Unary code for rank 40 (outside the 32-entry codebook) must raise err
    reset_streams();
    put(0, 32'h1, 32);
    for (int z = 0; z < 40; z++) strm[1].push_back(1'b0);
    strm[1].push_back(1'b1);
    @(negedge clk); job_mode = MODE_C1; job_full = 0; job_ntiles = 1; start = 1;
    @(negedge clk); start = 0;
    blk_valid = 1; blk_type = ST_BMP; blk_data = block(0, 0);
    @(negedge clk); blk_type = ST_EXP; blk_data = block(1, 0);
    @(negedge clk); blk_valid = 0;
    repeat (5) @(negedge clk);
    checks++; if (!err) begin failures++; $display("err not raised for an over-long codeword"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
