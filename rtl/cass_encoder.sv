// cass_encoder -- Cassandra encoder (dense BF16 tile -> per-type blocks in memory).
//
// Used online for the KV cache (weights are formatted offline). A tile of N values and its
// keep count k enter with valid/ready and are registered. In the next stage the bitonic
// sorter orders the values by magnitude, the format splitter keeps the top k (bitmap, kept
// list) and sets the rest aside as verification data, the exponent selector compresses the
// kept exponents (unary codes or MX shared exponent) and truncates the mantissas, and the
// address generator lays the fields out per data type. The merge buffer collects the bits
// per type and writes full 128-byte blocks, each with its type and the memory address the
// address generator keeps per type (`base[t]` + blocks written so far). `flush` after the
// last tile writes the partial blocks; `blk_cnt` then gives the block count per type. A
// flush that arrives while a tile is still registered is held until that tile has entered
// the merge buffer, and `flushed` stays low meanwhile.
// Throughput: one tile per cycle while no block is waiting; each written block costs a
// cycle in which no tile is taken. `err` is sticky and set when a kept exponent is missing
// from the unary table (Cassandra-1), which the paper's lossless format cannot represent.
// The chain of units follows the paper's encoder; registers and handshakes are this design's.
module cass_encoder
  import cass_pkg::*;
#(
  parameter int unsigned N     = TILE_DEF,
  parameter int unsigned NSYM  = NSYM_DEF,
  parameter int unsigned TRUNC = TRUNC_DEF,
  parameter int unsigned BLK   = BLK_DEF,
  parameter int unsigned AW    = 17
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // job
  input  logic                        start,
  input  cmode_e                      mode,
  input  logic [NSTREAM-1:0][AW-1:0]  base,
  input  logic                        flush,
  output logic                        flushed,
  output logic [NSTREAM-1:0][15:0]    blk_cnt,
  output logic                        err,
  // unary code table
  input  logic                        cb_wr_en,
  input  logic [$clog2(NSYM)-1:0]     cb_wr_idx,
  input  logic [7:0]                  cb_wr_exp,
  // tiles in
  input  logic                        in_valid,
  output logic                        in_ready,
  input  bf16_t [N-1:0]               in_vals,
  input  logic [$clog2(N+1)-1:0]      in_k,
  // blocks out
  output logic                        out_valid,
  input  logic                        out_ready,
  output stream_e                     out_type,
  output logic [AW-1:0]               out_addr,
  output logic [BLK-1:0]              out_data
);
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned KW = 15 + IW;
  localparam int unsigned KC = $clog2(N+1);
  localparam int unsigned LW = $clog2(NSYM+1);
  localparam int unsigned PL = $clog2(BLK+1);

  logic            s1_valid;
  bf16_t [N-1:0]   s1_vals;
  logic [KC-1:0]   s1_k;
  logic            mb_ready;
  logic            flush_pend, mb_flush, mb_flushed;

  assign in_ready = !s1_valid || mb_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_vals  <= '0;
      s1_k     <= '0;
    end else if (in_ready) begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_vals <= in_vals;
        s1_k    <= (int'(in_k) > N) ? KC'(N) : in_k;
      end
    end
  end

  logic [N-1:0][KW-1:0] keys, sorted;
  always_comb
    for (int i = 0; i < N; i++) keys[i] = {s1_vals[i][14:0], ~IW'(i)};

  cass_bitonic_sorter #(.N(N), .KW(KW)) u_sort (.keys(keys), .sorted(sorted));

  logic [N-1:0]  bitmap;
  bf16_t [N-1:0] kept, pruned;
  cass_format_splitter #(.N(N), .KW(KW)) u_split (
    .vals(s1_vals), .sorted(sorted), .k(s1_k), .bitmap(bitmap), .kept(kept), .pruned(pruned));

  logic [N-1:0][LW-1:0]         clen;
  logic [7:0]                   shexp;
  logic [N-1:0][MX_W-TRUNC:0]   spm_el;
  logic [N-1:0][TRUNC-1:0]      vlo_el;
  logic                         miss;
  cass_exp_sel #(.N(N), .NSYM(NSYM), .TRUNC(TRUNC)) u_esel (
    .clk, .rst_n, .cb_wr_en, .cb_wr_idx, .cb_wr_exp, .mode, .kept, .k(s1_k),
    .clen, .shexp, .spm_el, .vlo_el, .miss);

  logic [NSTREAM-1:0][BLK-1:0] pay;
  logic [NSTREAM-1:0][PL-1:0]  plen;
  logic [NSTREAM-1:0][AW-1:0]  next_addr;
  cass_addr_gen #(.N(N), .NSYM(NSYM), .TRUNC(TRUNC), .BLK(BLK), .AW(AW)) u_ag (
    .clk, .rst_n, .start, .base, .emit(out_valid && out_ready), .emit_type(out_type),
    .next_addr, .mode, .bitmap, .k(s1_k), .clen, .shexp, .spm_el, .vlo_el, .pruned,
    .pay, .plen);

  // hold a flush until the registered tile is in the merge buffer
  assign mb_flush = (flush || flush_pend) && !s1_valid;
  assign flushed  = mb_flushed && !s1_valid && !flush_pend && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        flush_pend <= 1'b0;
    else if (start)    flush_pend <= 1'b0;
    else if (mb_flush) flush_pend <= 1'b0;
    else if (flush)    flush_pend <= 1'b1;
  end

  cass_merge_buffer #(.BLK(BLK)) u_mb (
    .clk, .rst_n, .start, .in_valid(s1_valid), .in_ready(mb_ready), .pay, .plen,
    .flush(mb_flush), .flushed(mb_flushed), .blk_valid(out_valid), .blk_ready(out_ready), .blk_type(out_type),
    .blk_data(out_data), .blk_cnt);

  assign out_addr = next_addr[out_type];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             err <= 1'b0;
    else if (start)                         err <= 1'b0;
    else if (s1_valid && mb_ready && miss && mode == MODE_C1) err <= 1'b1;
  end
endmodule
