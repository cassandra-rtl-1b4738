// cass_block_sched -- block scheduler of the memory controller / DMA for one decoder.
//
// Implements the read side of the superblock scheme. Each data type's blocks lie
// contiguously from `base[t]` (as the encoder or the offline formatter wrote them), `nblk[t]`
// of them. Every cycle the scheduler offers at most one block read: it walks the types
// round robin from the one after the last type served and takes the first type that still
// has blocks and whose decoder buffer holds at most THRESH bits (128 bytes). A type that has
// blocks left but whose buffer holds more is skipped, and its skip counter goes up, so its
// next block address stays where it was and is read later. A draft job (`job_full` = 0)
// reads only the three speculation types. Since the scratchpad answers one cycle after the
// read and the buffer level one cycle after that, a type read in the previous cycle is not
// read again in this one. `done` pulses when the last block has been read.
// Skipping on a 128-byte level and tracking skip counts and next addresses per type follow
// the paper; round robin order and the in-flight rule are this design's.
module cass_block_sched
  import cass_pkg::*;
#(
  parameter int unsigned BLK    = BLK_DEF,
  parameter int unsigned THRESH = BLK,               // 128 bytes
  parameter int unsigned AW     = 17,
  parameter int unsigned LW     = $clog2(2*BLK+1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          job_full,
  input  logic [NSTREAM-1:0][AW-1:0]    base,
  input  logic [NSTREAM-1:0][15:0]      nblk,
  input  logic [NSTREAM-1:0][LW-1:0]    level,
  output logic                          rd_valid,
  output logic [AW-1:0]                 rd_addr,
  output stream_e                       rd_type,
  output logic                          busy,
  output logic                          done,
  output logic [NSTREAM-1:0][15:0]      skip_cnt
);
  logic [NSTREAM-1:0][AW-1:0] nxt;
  logic [NSTREAM-1:0][15:0]   remain;
  logic                       full_q;
  logic [2:0]                 rr;
  logic                       pend_v;
  stream_e                    pend_t;
  logic [NSTREAM-1:0]         want, elig, skip;

  always_comb begin
    for (int t = 0; t < NSTREAM; t++) begin
      want[t] = busy && (full_q || t < 3) && remain[t] != 0;
      elig[t] = want[t] && int'(level[t]) <= THRESH && !(pend_v && pend_t == stream_e'(t));
      skip[t] = want[t] && int'(level[t]) > THRESH;
    end
  end

  always_comb begin
    int unsigned c;
    rd_valid = 1'b0;
    rd_type  = ST_BMP;
    for (int o = NSTREAM-1; o >= 0; o--) begin
      c = (int'(rr) + o) % NSTREAM;
      if (elig[c]) begin
        rd_valid = 1'b1;
        rd_type  = stream_e'(c);
      end
    end
    rd_addr = nxt[rd_type];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt      <= '0;
      remain   <= '0;
      full_q   <= 1'b0;
      rr       <= '0;
      pend_v   <= 1'b0;
      pend_t   <= ST_BMP;
      busy     <= 1'b0;
      done     <= 1'b0;
      skip_cnt <= '0;
    end else begin
      done   <= 1'b0;
      pend_v <= rd_valid;
      pend_t <= rd_type;
      if (start && !busy) begin
        nxt      <= base;
        remain   <= nblk;
        full_q   <= job_full;
        busy     <= 1'b1;
        rr       <= '0;
        skip_cnt <= '0;
      end else if (busy) begin
        for (int t = 0; t < NSTREAM; t++)
          if (skip[t]) skip_cnt[t] <= skip_cnt[t] + 1'b1;
        if (rd_valid) begin
          nxt[rd_type]    <= nxt[rd_type] + 1'b1;
          remain[rd_type] <= remain[rd_type] - 1'b1;
          rr              <= (int'(rd_type) == NSTREAM-1) ? 3'd0 : 3'(rd_type) + 3'd1;
        end
        if (want == '0 || (rd_valid && want == (NSTREAM'(1) << rd_type) && remain[rd_type] == 16'd1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_one_read_per_type: assert property (@(posedge clk) disable iff (!rst_n)
    rd_valid |=> !(rd_valid && rd_type == $past(rd_type)));
endmodule
