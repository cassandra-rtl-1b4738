// tb_cass_encoder -- self-checking test of the Cassandra encoder.
//
// Random tiles with random keep counts go through the encoder in both schemes. Every block
// it writes is checked against the block the reference model cuts from its own streams,
// including the type and the address (base of the type plus blocks so far). The final
// per-type block counts, a stalled output port and the unary-table miss flag are checked too.
`timescale 1ns/1ps
module tb_cass_encoder;
  import cass_pkg::*;
  import cass_ref_pkg::*;

  localparam int NT = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, flush, flushed, err, cb_wr_en, in_valid, in_ready, out_valid, out_ready;
  cmode_e mode;
  logic [NSTREAM-1:0][16:0] base;
  logic [NSTREAM-1:0][15:0] blk_cnt;
  logic [4:0] cb_wr_idx;
  logic [7:0] cb_wr_exp;
  bf16_t [31:0] in_vals;
  logic [5:0] in_k;
  stream_e out_type;
  logic [16:0] out_addr;
  logic [1023:0] out_data;

  cass_encoder dut (.*);

  int checks = 0, failures = 0;
  int seen[5];
  int stalls;

  initial begin
    #3_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // block checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int t;
    t = int'(out_type);
    checks++;
    if (out_addr !== 17'(base[t] + 17'(seen[t]))) begin
      failures++; $display("type %0d block %0d: addr %0d", t, seen[t], out_addr);
    end
    checks++;
    if (seen[t] >= nblocks(t) || out_data !== block(t, seen[t])) begin
      failures++;
      if (failures < 10) $display("type %0d block %0d: data mismatch", t, seen[t]);
    end
    seen[t]++;
  end
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;

  task automatic run(bit c2);
    logic [15:0] v[T];
    int k, n, cyc;
    reset_streams();
    for (int t = 0; t < 5; t++) seen[t] = 0;
    @(negedge clk);
    mode = c2 ? MODE_C2 : MODE_C1;
    for (int t = 0; t < 5; t++) base[t] = 17'(1000 * t + (c2 ? 7 : 3));
    start = 1; @(negedge clk); start = 0;
    n = 0; cyc = 0;
    while (n < NT) begin
      for (int i = 0; i < T; i++) v[i] = rand_val();
      if (n % 5 == 1) for (int i = 0; i < 8; i++) v[4*i] = v[0];   // equal magnitudes
      k = (n % 9 == 0) ? 32 : (n % 9 == 4) ? 0 : $urandom_range(8, 26);
      void'(encode_tile(v, k, c2));
      for (int i = 0; i < T; i++) in_vals[i] = v[i];
      in_k = 6'(k); in_valid = 1;
      out_ready = ($urandom_range(0, 3) != 0);
      while (!in_ready) begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); end
      @(negedge clk);
      in_valid = 0; n++;
    end
    in_valid = 0;
    flush = 1; @(negedge clk); flush = 0;
    cyc = 0;
    while (!(flushed && !out_valid) && cyc < 200) begin
      out_ready = ($urandom_range(0, 1) != 0); @(negedge clk); cyc++;
    end
    out_ready = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (seen[t] != nblocks(t) || int'(blk_cnt[t]) != nblocks(t)) begin
        failures++; $display("type %0d: %0d blocks seen, count %0d, expected %0d", t, seen[t], blk_cnt[t], nblocks(t));
      end
    end
    checks++; if (err) begin failures++; $display("unexpected err"); end
  endtask

  initial begin
    start = 0; flush = 0; cb_wr_en = 0; in_valid = 0; out_ready = 1; mode = MODE_C1;
    base = '0; cb_wr_idx = 0; cb_wr_exp = 0; in_vals = '0; in_k = 0; stalls = 0;
    default_cbook();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NSYM; r++) begin
      @(negedge clk); cb_wr_en = 1; cb_wr_idx = 5'(r); cb_wr_exp = cbook[r];
    end
    @(negedge clk); cb_wr_en = 0;
    for (int cfg = 0; cfg < 2; cfg++) run(cfg[0]);
    checks++; if (stalls == 0) begin failures++; $display("output never stalled"); end
    // an exponent outside the table must raise err in Cassandra-1
    @(negedge clk); mode = MODE_C1; start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < T; i++) in_vals[i] = {1'b0, 8'd20, 7'd5};
    in_k = 6'd4; in_valid = 1; @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (!err) begin failures++; $display("err not raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
