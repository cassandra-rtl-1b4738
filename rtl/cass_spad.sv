// cass_spad -- on-chip scratchpad (matrix SRAM) holding the formatted blocks.
//
// WORDS words of BLK bits (one 128-byte block per word); the default 73,728 words are the
// paper's 9 MB scratchpad. One write port, used by the DMA to bring superblocks in from main
// memory, and NRD independent read ports with one cycle of latency, one per decoder plus one
// for standard data. A read and a write of the same word in one cycle return the old data.
// Written as an array; a real chip would use compiled SRAM macros and banking, which the
// paper only mentions. Contents are not reset.
module cass_spad #(
  parameter int unsigned WORDS = 73728,
  parameter int unsigned BLK   = cass_pkg::BLK_DEF,
  parameter int unsigned NRD   = 41,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [BLK-1:0]           wr_data,
  input  logic [NRD-1:0]           rd_en,
  input  logic [NRD-1:0][AW-1:0]   rd_addr,
  output logic [NRD-1:0][BLK-1:0]  rd_data
);
  logic [BLK-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule
