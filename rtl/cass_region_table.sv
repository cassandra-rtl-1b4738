// cass_region_table -- address-range table of the DMA controller.
//
// An NPU without virtual memory keeps standard data (e.g. activations) and Cassandra-format
// data (weights, KV cache) in separate physical address ranges, and the DMA controller must
// know the ranges to decode only the latter. This table holds NREG ranges [base, limit) each
// marked valid and Cassandra or standard, written through a configuration port. A lookup
// returns whether the address falls in a valid Cassandra range; the lowest matching entry
// wins, and an address in no range counts as standard. Lookups are combinational; reset
// clears the table.
// That the ranges are pre-stored in the DMA controller follows the paper; the table form is
// this design's.
module cass_region_table #(
  parameter int unsigned NREG = 4,
  parameter int unsigned AW   = 17,
  parameter int unsigned NQ   = 1          // parallel lookups
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(NREG)-1:0]     wr_idx,
  input  logic                        wr_valid,
  input  logic                        wr_cass,
  input  logic [AW-1:0]               wr_base,
  input  logic [AW-1:0]               wr_limit,
  input  logic [NQ-1:0][AW-1:0]       q_addr,
  output logic [NQ-1:0]               q_cass
);
  typedef struct packed {
    logic          valid;
    logic          cass;
    logic [AW-1:0] base;
    logic [AW-1:0] limit;
  } region_t;

  region_t [NREG-1:0] tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     tbl <= '0;
    else if (wr_en) tbl[wr_idx] <= '{valid: wr_valid, cass: wr_cass, base: wr_base, limit: wr_limit};
  end

  always_comb begin
    logic found;
    for (int q = 0; q < NQ; q++) begin
      q_cass[q] = 1'b0;
      found     = 1'b0;
      for (int r = 0; r < NREG; r++)
        if (!found && tbl[r].valid && q_addr[q] >= tbl[r].base && q_addr[q] < tbl[r].limit) begin
          found     = 1'b1;
          q_cass[q] = tbl[r].cass;
        end
    end
  end
endmodule
