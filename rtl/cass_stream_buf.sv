// cass_stream_buf -- input block buffer of one data type (decoder side).
//
// A bit FIFO of CAP bits. The memory side pushes whole BLK-bit blocks; the decoder looks at
// the oldest WIN bits (`win`, bit 0 oldest) and pops any number of them up to WIN per cycle.
// Bits a tile does not use stay in the buffer and are joined with the next block of the same
// type, which is how the paper's decoder keeps the leftover data of a partly used block.
// `level` tells the block scheduler how full the buffer is; it skips this type while the
// level is above 128 bytes, so with CAP = 2*BLK a push never overflows. Pop and push in the
// same cycle are allowed (pop applies first). `clr` empties the buffer at a job start.
// Timing: a push or pop is visible in `level` and `win` the next cycle.
// Leftover keeping follows the paper; capacity, window and interface are this design's.
module cass_stream_buf #(
  parameter int unsigned BLK = cass_pkg::BLK_DEF,
  parameter int unsigned CAP = 2 * BLK,
  parameter int unsigned WIN = 512,
  parameter int unsigned LW  = $clog2(CAP+1),
  parameter int unsigned PW  = $clog2(WIN+1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            push,
  input  logic [BLK-1:0]  push_data,
  input  logic [PW-1:0]   pop_n,
  output logic [LW-1:0]   level,
  output logic [WIN-1:0]  win
);
  logic [CAP-1:0] data_q;
  logic [LW-1:0]  lvl_after_pop;
  logic [CAP-1:0] shifted;

  assign lvl_after_pop = level - LW'(pop_n);
  assign shifted       = data_q >> pop_n;
  assign win           = data_q[WIN-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q <= '0;
      level  <= '0;
    end else if (clr) begin
      data_q <= '0;
      level  <= '0;
    end else begin
      if (push) begin
        data_q <= shifted | ({{(CAP-BLK){1'b0}}, push_data} << lvl_after_pop);
        level  <= lvl_after_pop + LW'(BLK);
      end else begin
        data_q <= shifted;
        level  <= lvl_after_pop;
      end
    end
  end

  // Bits above `level` are always zero, so the window can be read without masking.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clr)
    int'(pop_n) <= int'(level))
    else $error("cass_stream_buf: pop of %0d bits with %0d buffered", pop_n, level);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n || clr)
    push |-> int'(lvl_after_pop) + BLK <= CAP)
    else $error("cass_stream_buf: overflow");
endmodule
