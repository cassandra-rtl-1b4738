// tb_cassandra_top -- end-to-end test of the DMA with Cassandra, with 5 decode lanes instead of
// 40 (everything else at its default, including the 9 MB scratchpad) to keep the build short.
//
// For each scheme (Cassandra-1, then Cassandra-2) random tiles go through the encoder; its
// blocks are checked against the reference model, then written into the scratchpad through
// the main-memory port. Decode commands then read the same data back as draft (speculation
// data only) and target (everything) on several lanes at once, with stalls on the output
// side so that buffers fill and the block schedulers must skip; every decoded tile is
// compared with the reference. Refusals (busy lane, base address outside a Cassandra range,
// standard read of a Cassandra address) and the standard-data bypass are exercised as well.
// Each mechanism is counted, and one that never happened counts as a failure.
`timescale 1ns/1ps
module tb_cassandra_top;
  import cass_pkg::*;
  import cass_ref_pkg::*;

  localparam int NDEC = 5;
  localparam int AW   = 17;
  localparam int NT   = 24;                 // tiles per scheme

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cb_wr_en, rg_wr_en, rg_wr_valid, rg_wr_cass, mm_wr_en;
  logic [4:0] cb_wr_idx;
  logic [7:0] cb_wr_exp;
  logic [1:0] rg_wr_idx;
  logic [AW-1:0] rg_wr_base, rg_wr_limit, mm_wr_addr;
  logic [1023:0] mm_wr_data;
  logic cmd_valid, cmd_ready, cmd_err, cmd_full;
  logic [$clog2(NDEC)-1:0] cmd_lane;
  cmode_e cmd_mode;
  logic [15:0] cmd_ntiles;
  logic [4:0][AW-1:0] cmd_base;
  logic [4:0][15:0] cmd_nblk;
  logic [NDEC-1:0] out_valid, out_ready, dec_busy, dec_done, dec_err;
  bf16_t [NDEC-1:0][31:0] out_data;
  logic [NDEC-1:0][4:0][15:0] skip_cnt;
  logic raw_valid, raw_err, raw_rvalid;
  logic [AW-1:0] raw_addr;
  logic [1023:0] raw_rdata;
  logic enc_start, enc_flush, enc_flushed, enc_err, enc_in_valid, enc_in_ready;
  logic enc_out_valid, enc_out_ready;
  cmode_e enc_mode;
  logic [4:0][AW-1:0] enc_base;
  logic [4:0][15:0] enc_blk_cnt;
  bf16_t [31:0] enc_in_vals;
  logic [5:0] enc_in_k;
  stream_e enc_out_type;
  logic [AW-1:0] enc_out_addr;
  logic [1023:0] enc_out_data;

  cassandra_top #(.NDEC(NDEC)) dut (.*);

  int checks = 0, failures = 0;

  // tiles of both schemes
  logic [15:0]  tv[2][NT][T];
  logic [T-1:0] tk[2][NT];
  int           nb[2][5];
  int           sbase[2][5];

  // blocks written by the encoder, captured for the scratchpad
  logic [1023:0] cap_data[$];
  logic [AW-1:0] cap_addr[$];
  int enc_seen[5];

  // per-lane job being checked
  int  lane_set[NDEC], lane_cnt[NDEC];
  bit  lane_full[NDEC];

  // mechanism counters
  int n_enc_blk, n_enc_stall, n_draft, n_target, n_c1, n_c2, n_parallel, n_out_stall;
  int n_busy_ref, n_cmd_err, n_raw_rd, n_raw_err, n_skip, n_done;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // encoder output checker
  always @(posedge clk) if (rst_n && enc_out_valid) begin
    if (!enc_out_ready) n_enc_stall++;
    else begin
      int t;
      t = int'(enc_out_type);
      checks++;
      if (enc_out_addr !== AW'(int'(enc_base[t]) + enc_seen[t]) || enc_seen[t] >= nblocks(t) ||
          enc_out_data !== block(t, enc_seen[t])) begin
        failures++;
        if (failures < 10) begin
          logic [1023:0] eb;
          eb = block(t, enc_seen[t]);
          for (int b = 0; b < 1024; b++) if (eb[b] !== enc_out_data[b]) begin
            $display("encoder block type %0d #%0d wrong from bit %0d (stream %0d bits) addr %0d", t, enc_seen[t], b, strm[t].size(), enc_out_addr);
            break;
          end
        end
      end
      cap_data.push_back(enc_out_data);
      cap_addr.push_back(enc_out_addr);
      enc_seen[t]++;
      n_enc_blk++;
    end
  end

  // decoded tile checker
  always @(posedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int d = 0; d < NDEC; d++) begin
      if (out_valid[d] && !out_ready[d]) n_out_stall++;
      if (out_valid[d] && out_ready[d]) begin
        int s, n;
        s = lane_set[d]; n = lane_cnt[d];
        nv++;
        checks++;
        if (s < 0 || n >= NT) begin
          failures++; $display("lane %0d: unexpected tile", d);
        end else begin
          for (int i = 0; i < T; i++)
            if (out_data[d][i] !== expect_val(tv[s][n], tk[s][n], s == 1, lane_full[d], i)) begin
              failures++;
              if (failures < 10) $display("lane %0d tile %0d value %0d: %h", d, n, i, out_data[d][i]);
              break;
            end
          if (lane_full[d]) n_target++; else n_draft++;
          if (s == 1) n_c2++; else n_c1++;
        end
        lane_cnt[d]++;
      end
      if (dec_done[d]) begin
        n_done++;
        checks++;
        if (lane_cnt[d] != NT) begin failures++; $display("lane %0d done after %0d tiles", d, lane_cnt[d]); end
      end
      for (int t = 0; t < 5; t++) n_skip += (skip_cnt[d][t] != 0 && dec_done[d]) ? int'(skip_cnt[d][t]) : 0;
    end
    if (nv > 1) n_parallel++;
  end

  always @(negedge clk) for (int d = 0; d < NDEC; d++) out_ready[d] = ($urandom_range(0, 3) == 0);

  task automatic encode_set(int s);
    logic [15:0] v[T];
    int k;
    reset_streams();
    for (int t = 0; t < 5; t++) enc_seen[t] = 0;
    cap_data.delete(); cap_addr.delete();
    @(negedge clk);
    enc_mode = (s == 1) ? MODE_C2 : MODE_C1;
    for (int t = 0; t < 5; t++) begin sbase[s][t] = 20000 * s + 1000 * t + 11; enc_base[t] = AW'(sbase[s][t]); end
    enc_start = 1; @(negedge clk); enc_start = 0;
    for (int n = 0; n < NT; n++) begin
      for (int i = 0; i < T; i++) v[i] = rand_val();
      k = (n % 7 == 3) ? 32 : (n % 11 == 5) ? 0 : $urandom_range(6, 28);
      tk[s][n] = encode_tile(v, k, s == 1);
      tv[s][n] = v;
      for (int i = 0; i < T; i++) enc_in_vals[i] = v[i];
      enc_in_k = 6'(k); enc_in_valid = 1;
      enc_out_ready = ($urandom_range(0, 2) != 0);
      while (!enc_in_ready) begin @(negedge clk); enc_out_ready = ($urandom_range(0, 2) != 0); end
      @(negedge clk);
      enc_in_valid = 0;
    end
    enc_flush = 1; @(negedge clk); enc_flush = 0;
    enc_out_ready = 1;
    while (!(enc_flushed && !enc_out_valid)) @(negedge clk);
    @(negedge clk);
    for (int t = 0; t < 5; t++) begin
      nb[s][t] = nblocks(t);
      checks++;
      if (enc_seen[t] != nb[s][t] || int'(enc_blk_cnt[t]) != nb[s][t]) begin
        failures++; $display("set %0d type %0d: %0d blocks, expected %0d", s, t, enc_seen[t], nb[s][t]);
      end
    end
    checks++; if (enc_err) begin failures++; $display("encoder err"); end
    // main memory -> scratchpad
    while (cap_data.size() > 0) begin
      mm_wr_en = 1; mm_wr_addr = cap_addr.pop_front(); mm_wr_data = cap_data.pop_front();
      @(negedge clk);
    end
    mm_wr_en = 0;
  endtask

  // issue one decode command; returns 1 if accepted
  task automatic issue(int lane, int s, bit full, output bit ok);
    cmd_lane = ($clog2(NDEC))'(lane); cmd_mode = (s == 1) ? MODE_C2 : MODE_C1; cmd_full = full;
    cmd_ntiles = 16'(NT);
    for (int t = 0; t < 5; t++) begin cmd_base[t] = AW'(sbase[s][t]); cmd_nblk[t] = 16'(nb[s][t]); end
    cmd_valid = 1;
    #1;
    ok = cmd_ready && !cmd_err;
    if (!cmd_ready) n_busy_ref++;
    if (ok) begin lane_set[lane] = s; lane_cnt[lane] = 0; lane_full[lane] = full; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    bit ok;
    int cyc;
    logic [1023:0] rw;
    cb_wr_en = 0; rg_wr_en = 0; rg_wr_valid = 0; rg_wr_cass = 0; mm_wr_en = 0;
    cb_wr_idx = 0; cb_wr_exp = 0; rg_wr_idx = 0; rg_wr_base = 0; rg_wr_limit = 0;
    mm_wr_addr = 0; mm_wr_data = 0; cmd_valid = 0; cmd_full = 0; cmd_lane = 0; cmd_mode = MODE_C1;
    cmd_ntiles = 0; cmd_base = '0; cmd_nblk = '0; raw_valid = 0; raw_addr = 0;
    enc_start = 0; enc_flush = 0; enc_in_valid = 0; enc_out_ready = 1; enc_mode = MODE_C1;
    enc_base = '0; enc_in_vals = '0; enc_in_k = 0;
    n_enc_blk = 0; n_enc_stall = 0; n_draft = 0; n_target = 0; n_c1 = 0; n_c2 = 0;
    n_parallel = 0; n_out_stall = 0; n_busy_ref = 0; n_cmd_err = 0; n_raw_rd = 0;
    n_raw_err = 0; n_skip = 0; n_done = 0;
    for (int d = 0; d < NDEC; d++) begin lane_set[d] = -1; lane_cnt[d] = 0; lane_full[d] = 0; end
    default_cbook();
    repeat (3) @(negedge clk); rst_n = 1;
    // codebook into every decoder and the encoder
    for (int r = 0; r < NSYM; r++) begin
      cb_wr_en = 1; cb_wr_idx = 5'(r); cb_wr_exp = cbook[r]; @(negedge clk);
    end
    cb_wr_en = 0;
    // regions: [0, 40000) Cassandra, [40000, 73728) standard
    rg_wr_en = 1; rg_wr_idx = 0; rg_wr_valid = 1; rg_wr_cass = 1; rg_wr_base = 0; rg_wr_limit = AW'(40000);
    @(negedge clk);
    rg_wr_idx = 1; rg_wr_cass = 0; rg_wr_base = AW'(40000); rg_wr_limit = AW'(73728);
    @(negedge clk);
    rg_wr_en = 0;

    encode_set(0);
    encode_set(1);

    // decode: four lanes at once, both schemes, draft and target
    issue(0, 0, 0, ok);  checks++; if (!ok) begin failures++; $display("lane 0 refused"); end
    issue(1, 0, 1, ok);  checks++; if (!ok) begin failures++; $display("lane 1 refused"); end
    issue(2, 1, 1, ok);  checks++; if (!ok) begin failures++; $display("lane 2 refused"); end
    issue(3, 1, 0, ok);  checks++; if (!ok) begin failures++; $display("lane 3 refused"); end
    issue(0, 1, 1, ok);  checks++; if (ok)  begin failures++; $display("busy lane accepted"); end
    // base address in the standard range must be refused
    cmd_lane = ($clog2(NDEC))'(4); cmd_mode = MODE_C1; cmd_full = 1; cmd_ntiles = 16'd1;
    cmd_base = '0; cmd_base[3] = AW'(45000); cmd_nblk = '0; cmd_valid = 1;
    #1; checks++;
    if (cmd_err) n_cmd_err++; else begin failures++; $display("cmd_err not raised"); end
    @(negedge clk); cmd_valid = 0;
    checks++; if (dec_busy[4]) begin failures++; $display("refused command started lane 4"); end
    // standard data bypass during decoding
    rw = {32{$urandom}};
    mm_wr_en = 1; mm_wr_addr = AW'(50000); mm_wr_data = rw; @(negedge clk); mm_wr_en = 0;
    raw_valid = 1; raw_addr = AW'(50000); #1;
    checks++; if (raw_err) begin failures++; $display("raw_err on a standard address"); end
    @(negedge clk); raw_valid = 0; #1;
    checks++;
    if (raw_rvalid && raw_rdata === rw) n_raw_rd++; else begin failures++; $display("raw read wrong"); end
    raw_valid = 1; raw_addr = AW'(100); #1;
    checks++; if (raw_err) n_raw_err++; else begin failures++; $display("raw_err not raised"); end
    @(negedge clk); raw_valid = 0;
    // wait for the lanes
    cyc = 0;
    while (dec_busy != '0 && cyc < 20000) begin @(negedge clk); cyc++; end
    repeat (4) @(negedge clk);
    foreach (lane_cnt[d]) if (lane_set[d] >= 0) begin
      checks++;
      if (lane_cnt[d] != NT) begin failures++; $display("lane %0d: %0d tiles", d, lane_cnt[d]); end
    end
    checks++; if (dec_err != '0) begin failures++; $display("decoder err"); end
    // second round on the same lane after completion, Cassandra-1 target
    issue(0, 0, 1, ok); checks++; if (!ok) begin failures++; $display("lane 0 not reusable"); end
    cyc = 0;
    while (dec_busy != '0 && cyc < 20000) begin @(negedge clk); cyc++; end
    repeat (4) @(negedge clk);
    checks++; if (lane_cnt[0] != NT) begin failures++; $display("lane 0 second job: %0d tiles", lane_cnt[0]); end

    $display("mechanisms: enc_blocks=%0d enc_stalls=%0d draft_tiles=%0d target_tiles=%0d c1_tiles=%0d c2_tiles=%0d",
             n_enc_blk, n_enc_stall, n_draft, n_target, n_c1, n_c2);
    $display("            parallel_cycles=%0d out_stalls=%0d skips=%0d busy_refusals=%0d cmd_err=%0d raw_reads=%0d raw_err=%0d done=%0d",
             n_parallel, n_out_stall, n_skip, n_busy_ref, n_cmd_err, n_raw_rd, n_raw_err, n_done);
    checks += 14;
    if (n_enc_blk == 0)   begin failures++; $display("no encoder blocks"); end
    if (n_enc_stall == 0) begin failures++; $display("encoder output never stalled"); end
    if (n_draft == 0)     begin failures++; $display("no draft tiles"); end
    if (n_target == 0)    begin failures++; $display("no target tiles"); end
    if (n_c1 == 0)        begin failures++; $display("no Cassandra-1 tiles"); end
    if (n_c2 == 0)        begin failures++; $display("no Cassandra-2 tiles"); end
    if (n_parallel == 0)  begin failures++; $display("lanes never worked in parallel"); end
    if (n_out_stall == 0) begin failures++; $display("outputs never stalled"); end
    if (n_skip == 0)      begin failures++; $display("scheduler never skipped"); end
    if (n_busy_ref == 0)  begin failures++; $display("no busy refusal"); end
    if (n_cmd_err == 0)   begin failures++; $display("no cmd_err"); end
    if (n_raw_rd == 0)    begin failures++; $display("no bypass read"); end
    if (n_raw_err == 0)   begin failures++; $display("no raw_err"); end
    if (n_done != 5)      begin failures++; $display("done pulses %0d, expected 5", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
