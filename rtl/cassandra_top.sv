// cassandra_top -- DMA of an NPU with Cassandra decoders and encoder.
//
// Cassandra lets an edge accelerator run speculative decoding without a separate draft
// model: weights and KV cache are stored once, split into speculation data (top-k values,
// compressed exponents, truncated mantissas, bitmap) and verification data (the rest). A
// draft read fetches and decodes the speculation data only; a target read fetches both and
// restores the exact values (Cassandra-1) or their MX-rounded form (Cassandra-2).
// This top is the DMA side of such an NPU:
//  * scratchpad (cass_spad): superblocks brought in from main memory (`mm_wr_*`);
//  * region table (cass_region_table): which address ranges hold Cassandra data;
//  * NDEC lanes of block scheduler (cass_block_sched) + decoder (cass_decoder); a decode
//    command names a lane, the scheme, draft or target, the tile count and, per data type,
//    base address and block count. Decoded dense tiles leave on `out_*` towards the matrix
//    unit. A command whose base addresses are not all in Cassandra ranges is refused
//    (`cmd_err`), as is a command to a busy lane (`cmd_ready` low);
//  * a standard-data read port (`raw_*`) that bypasses the decoders, refused
//    (`raw_err`) for an address inside a Cassandra range;
//  * one encoder (cass_encoder) formatting new KV-cache tiles from the vector unit; its
//    blocks go out to main memory (`enc_out_*`).
// The unary codebook is written once (`cb_*`) into every decoder and the encoder.
// Timing: scratchpad reads take one cycle; a decode lane then behaves as cass_decoder.
// Placement in the DMA, 40 decoders for a 1024-byte-per-cycle scratchpad, one encoder,
// 9 MB scratchpad and 128-byte blocks follow the paper; command format, lane structure and
// the refusal rules are this design's.
module cassandra_top
  import cass_pkg::*;
#(
  parameter int unsigned NDEC  = 40,
  parameter int unsigned WORDS = 73728,
  parameter int unsigned TILE  = TILE_DEF,
  parameter int unsigned TRUNC = TRUNC_DEF,
  parameter int unsigned NSYM  = NSYM_DEF,
  parameter int unsigned BLK   = BLK_DEF,
  parameter int unsigned NREG  = 4,
  parameter int unsigned AW    = $clog2(WORDS),
  parameter int unsigned DW    = (NDEC > 1) ? $clog2(NDEC) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // configuration
  input  logic                               cb_wr_en,
  input  logic [$clog2(NSYM)-1:0]            cb_wr_idx,
  input  logic [7:0]                         cb_wr_exp,
  input  logic                               rg_wr_en,
  input  logic [$clog2(NREG)-1:0]            rg_wr_idx,
  input  logic                               rg_wr_valid,
  input  logic                               rg_wr_cass,
  input  logic [AW-1:0]                      rg_wr_base,
  input  logic [AW-1:0]                      rg_wr_limit,
  // main memory -> scratchpad
  input  logic                               mm_wr_en,
  input  logic [AW-1:0]                      mm_wr_addr,
  input  logic [BLK-1:0]                     mm_wr_data,
  // decode commands
  input  logic                               cmd_valid,
  output logic                               cmd_ready,
  output logic                               cmd_err,
  input  logic [DW-1:0]                      cmd_lane,
  input  cmode_e                             cmd_mode,
  input  logic                               cmd_full,
  input  logic [15:0]                        cmd_ntiles,
  input  logic [NSTREAM-1:0][AW-1:0]         cmd_base,
  input  logic [NSTREAM-1:0][15:0]           cmd_nblk,
  // decoded tiles to the matrix unit
  output logic [NDEC-1:0]                    out_valid,
  input  logic [NDEC-1:0]                    out_ready,
  output bf16_t [NDEC-1:0][TILE-1:0]         out_data,
  output logic [NDEC-1:0]                    dec_busy,
  output logic [NDEC-1:0]                    dec_done,
  output logic [NDEC-1:0]                    dec_err,
  output logic [NDEC-1:0][NSTREAM-1:0][15:0] skip_cnt,
  // standard data read (bypass)
  input  logic                               raw_valid,
  input  logic [AW-1:0]                      raw_addr,
  output logic                               raw_err,
  output logic                               raw_rvalid,
  output logic [BLK-1:0]                     raw_rdata,
  // encoder
  input  logic                               enc_start,
  input  cmode_e                             enc_mode,
  input  logic [NSTREAM-1:0][AW-1:0]         enc_base,
  input  logic                               enc_flush,
  output logic                               enc_flushed,
  output logic [NSTREAM-1:0][15:0]           enc_blk_cnt,
  output logic                               enc_err,
  input  logic                               enc_in_valid,
  output logic                               enc_in_ready,
  input  bf16_t [TILE-1:0]                   enc_in_vals,
  input  logic [$clog2(TILE+1)-1:0]          enc_in_k,
  output logic                               enc_out_valid,
  input  logic                               enc_out_ready,
  output stream_e                            enc_out_type,
  output logic [AW-1:0]                      enc_out_addr,
  output logic [BLK-1:0]                     enc_out_data
);
  localparam int unsigned LW = $clog2(2*BLK+1);
  localparam int unsigned NRD = NDEC + 1;

  // ---------------- region checks ----------------
  logic [NSTREAM:0][AW-1:0] q_addr;
  logic [NSTREAM:0]         q_cass;
  always_comb begin
    for (int t = 0; t < NSTREAM; t++) q_addr[t] = cmd_base[t];
    q_addr[NSTREAM] = raw_addr;
  end

  cass_region_table #(.NREG(NREG), .AW(AW), .NQ(NSTREAM+1)) u_rt (
    .clk, .rst_n, .wr_en(rg_wr_en), .wr_idx(rg_wr_idx), .wr_valid(rg_wr_valid),
    .wr_cass(rg_wr_cass), .wr_base(rg_wr_base), .wr_limit(rg_wr_limit),
    .q_addr, .q_cass);

  // ---------------- scratchpad ----------------
  logic [NRD-1:0]           rd_en;
  logic [NRD-1:0][AW-1:0]   rd_addr;
  logic [NRD-1:0][BLK-1:0]  rd_data;

  cass_spad #(.WORDS(WORDS), .BLK(BLK), .NRD(NRD), .AW(AW)) u_spad (
    .clk, .wr_en(mm_wr_en), .wr_addr(mm_wr_addr), .wr_data(mm_wr_data),
    .rd_en, .rd_addr, .rd_data);

  // ---------------- decode lanes ----------------
  logic cmd_ok;
  logic [NDEC-1:0] lane_busy;
  assign cmd_ok    = (q_cass[NSTREAM-1:0] == '1);
  assign cmd_ready = !lane_busy[cmd_lane];
  assign cmd_err   = cmd_valid && cmd_ready && !cmd_ok;

  for (genvar d = 0; d < NDEC; d++) begin : g_lane
    logic                          go;
    logic                          s_busy, s_done;
    stream_e                       s_type, blk_type;
    logic                          blk_valid;
    logic [NSTREAM-1:0][LW-1:0]    level;

    assign go = cmd_valid && cmd_ready && cmd_ok && (cmd_lane == DW'(d));
    assign lane_busy[d] = s_busy || dec_busy[d];

    cass_block_sched #(.BLK(BLK), .AW(AW)) u_sched (
      .clk, .rst_n, .start(go), .job_full(cmd_full), .base(cmd_base), .nblk(cmd_nblk),
      .level, .rd_valid(rd_en[d]), .rd_addr(rd_addr[d]), .rd_type(s_type),
      .busy(s_busy), .done(s_done), .skip_cnt(skip_cnt[d]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        blk_valid <= 1'b0;
        blk_type  <= ST_BMP;
      end else begin
        blk_valid <= rd_en[d];
        blk_type  <= s_type;
      end
    end

    cass_decoder #(.TILE(TILE), .TRUNC(TRUNC), .NSYM(NSYM), .BLK(BLK)) u_dec (
      .clk, .rst_n, .start(go), .job_mode(cmd_mode), .job_full(cmd_full),
      .job_ntiles(cmd_ntiles), .busy(dec_busy[d]), .done(dec_done[d]),
      .lut_wr_en(cb_wr_en), .lut_wr_idx(cb_wr_idx), .lut_wr_exp(cb_wr_exp),
      .blk_valid, .blk_type, .blk_data(rd_data[d]), .level,
      .out_valid(out_valid[d]), .out_ready(out_ready[d]), .out_data(out_data[d]),
      .err(dec_err[d]));
  end

  // ---------------- standard data bypass ----------------
  assign raw_err            = raw_valid && q_cass[NSTREAM];
  assign rd_en[NDEC]        = raw_valid && !q_cass[NSTREAM];
  assign rd_addr[NDEC]      = raw_addr;
  assign raw_rdata          = rd_data[NDEC];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) raw_rvalid <= 1'b0;
    else        raw_rvalid <= rd_en[NDEC];
  end

  // ---------------- encoder ----------------
  cass_encoder #(.N(TILE), .NSYM(NSYM), .TRUNC(TRUNC), .BLK(BLK), .AW(AW)) u_enc (
    .clk, .rst_n, .start(enc_start), .mode(enc_mode), .base(enc_base), .flush(enc_flush),
    .flushed(enc_flushed), .blk_cnt(enc_blk_cnt), .err(enc_err),
    .cb_wr_en, .cb_wr_idx, .cb_wr_exp,
    .in_valid(enc_in_valid), .in_ready(enc_in_ready), .in_vals(enc_in_vals), .in_k(enc_in_k),
    .out_valid(enc_out_valid), .out_ready(enc_out_ready), .out_type(enc_out_type),
    .out_addr(enc_out_addr), .out_data(enc_out_data));
endmodule
