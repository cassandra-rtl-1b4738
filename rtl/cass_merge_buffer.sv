// cass_merge_buffer -- merge buffer of the encoder.
//
// One accumulator of 2*BLK bits per data type. A tile's per-type bit strings (`pay`,
// `plen`) are appended behind the bits already held; whenever a type holds a whole block
// (BLK bits, 128 bytes) that block is written out, lowest type number first, one block per
// cycle, with valid/ready. A new tile is accepted only while no type holds a whole block, so
// an accumulator never overflows. `flush` writes out every partly filled block, padded with
// zeros, after the last tile of a job; `flushed` reports that all accumulators are empty.
// `blk_cnt` counts the blocks written per type since `start`, which software needs to read
// the data back.
// Buffering before the write to memory follows the paper; block order and flush are this
// design's.
module cass_merge_buffer
  import cass_pkg::*;
#(
  parameter int unsigned BLK = BLK_DEF,
  parameter int unsigned PL  = $clog2(BLK+1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic                            in_valid,
  output logic                            in_ready,
  input  logic [NSTREAM-1:0][BLK-1:0]     pay,
  input  logic [NSTREAM-1:0][PL-1:0]      plen,
  input  logic                            flush,
  output logic                            flushed,
  output logic                            blk_valid,
  input  logic                            blk_ready,
  output stream_e                         blk_type,
  output logic [BLK-1:0]                  blk_data,
  output logic [NSTREAM-1:0][15:0]        blk_cnt
);
  localparam int unsigned CAP = 2 * BLK;
  localparam int unsigned LW  = $clog2(CAP+1);

  logic [NSTREAM-1:0][CAP-1:0] acc;
  logic [NSTREAM-1:0][LW-1:0]  lvl;
  logic                        flushing;
  logic [NSTREAM-1:0]          has_blk, has_any;

  always_comb begin
    for (int t = 0; t < NSTREAM; t++) begin
      has_blk[t] = int'(lvl[t]) >= BLK;
      has_any[t] = lvl[t] != 0;
    end
  end

  assign in_ready = (has_blk == '0) && !flushing;
  assign flushed  = (has_any == '0);

  always_comb begin
    blk_valid = 1'b0;
    blk_type  = ST_BMP;
    for (int t = NSTREAM-1; t >= 0; t--)
      if (has_blk[t] || (flushing && has_any[t])) begin
        blk_valid = 1'b1;
        blk_type  = stream_e'(t);
      end
    blk_data = acc[blk_type][BLK-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      lvl      <= '0;
      flushing <= 1'b0;
      blk_cnt  <= '0;
    end else begin
      if (start) begin
        blk_cnt  <= '0;
        flushing <= 1'b0;
      end
      if (flush)                    flushing <= 1'b1;
      else if (flushing && flushed) flushing <= 1'b0;
      if (in_valid && in_ready) begin
        for (int t = 0; t < NSTREAM; t++) begin
          acc[t] <= acc[t] | ({{BLK{1'b0}}, pay[t]} << lvl[t]);
          lvl[t] <= lvl[t] + LW'(plen[t]);
        end
      end else if (blk_valid && blk_ready) begin
        acc[blk_type] <= acc[blk_type] >> BLK;
        lvl[blk_type] <= (int'(lvl[blk_type]) >= BLK) ? lvl[blk_type] - LW'(BLK) : '0;
        blk_cnt[blk_type] <= blk_cnt[blk_type] + 1'b1;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_ready |-> int'(lvl[0]) + int'(plen[0]) <= CAP);
endmodule
