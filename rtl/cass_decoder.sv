// cass_decoder -- one Cassandra decoder (speculation / verification data -> dense BF16 tiles).
//
// Blocks of the five data types (see cass_pkg) arrive on one port tagged with their type and
// go to five input block buffers (cass_stream_buf), which keep leftover bits across blocks.
// A job decodes `job_ntiles` tiles of TILE values in one of two schemes (`job_mode`) and one
// of two read kinds (`job_full`: 0 = draft, speculation data only; 1 = target, both parts).
// Per tile a small state machine runs:
//   BMP  take TILE bitmap bits; k = number of kept values.
//   UEXP Cassandra-1: each cycle decode up to 32 unary bits in parallel
//        (cass_unary_decoder), map ranks to exponents through the codebook LUT
//        (cass_exp_lut) and queue them, until k exponents are held. Several cycles per tile.
//   MXE  Cassandra-2: take the 8-bit shared exponent.
//   VAL  once the {sign, mantissa-high}, low-mantissa and pruned-value bits for the tile are
//        buffered, all lanes work at once: mantissa concatenator, dynamic shifter, then the
//        bitmap-based value concatenator; the tile is written to the decoded data buffer.
//   OUT  the decoded tile is offered with valid/ready; `out_data` holds until accepted.
// Latency per tile is 3 cycles plus one per unary window, plus any wait for data. The units
// and their order follow the paper's decoder; the state machine, tile size and stream layout
// are this design's. `err` is sticky: a codeword rank outside the codebook.
module cass_decoder
  import cass_pkg::*;
#(
  parameter int unsigned TILE  = TILE_DEF,
  parameter int unsigned TRUNC = TRUNC_DEF,
  parameter int unsigned EXPW  = EXPW_DEF,
  parameter int unsigned NSYM  = NSYM_DEF,
  parameter int unsigned BLK   = BLK_DEF,
  parameter int unsigned LW    = $clog2(2*BLK+1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // job
  input  logic                      start,
  input  cmode_e                    job_mode,
  input  logic                      job_full,
  input  logic [15:0]               job_ntiles,
  output logic                      busy,
  output logic                      done,        // one-cycle pulse after the last tile
  // codebook
  input  logic                      lut_wr_en,
  input  logic [$clog2(NSYM)-1:0]   lut_wr_idx,
  input  logic [7:0]                lut_wr_exp,
  // blocks from memory
  input  logic                      blk_valid,
  input  stream_e                   blk_type,
  input  logic [BLK-1:0]            blk_data,
  output logic [NSTREAM-1:0][LW-1:0] level,
  // decoded tiles
  output logic                      out_valid,
  input  logic                      out_ready,
  output bf16_t [TILE-1:0]          out_data,
  output logic                      err
);
  localparam int unsigned SPW1 = 1 + MAN_W - TRUNC;
  localparam int unsigned SPW2 = 1 + MX_W - TRUNC;
  localparam int unsigned MHW  = MX_W - TRUNC;
  localparam int unsigned KW   = $clog2(TILE+1);
  localparam int unsigned RW   = $clog2(EXPW);
  localparam int unsigned EW   = $clog2(EXPW+1);
  localparam int unsigned WB   = TILE;
  localparam int unsigned WE   = EXPW;
  localparam int unsigned WS   = TILE * SPW2;
  localparam int unsigned WV   = TILE * TRUNC;
  localparam int unsigned WP   = TILE * BF_W;

  typedef enum logic [2:0] {S_IDLE, S_BMP, S_UEXP, S_MXE, S_VAL, S_OUT} state_e;
  state_e state;

  cmode_e      mode_q;
  logic        full_q;
  logic [15:0] tiles_left;
  logic [TILE-1:0] bmp_q;
  logic [KW-1:0]   k_q, got_q;
  logic [TILE-1:0][7:0] exp_q;   // exponent queue of the current tile
  logic [7:0]  shexp_q;

  // ---------------- input block buffers ----------------
  logic [WB-1:0] win_b;
  logic [WE-1:0] win_e;
  logic [WS-1:0] win_s;
  logic [WV-1:0] win_v;
  logic [WP-1:0] win_p;
  logic [$clog2(WB+1)-1:0] pop_b;
  logic [$clog2(WE+1)-1:0] pop_e;
  logic [$clog2(WS+1)-1:0] pop_s;
  logic [$clog2(WV+1)-1:0] pop_v;
  logic [$clog2(WP+1)-1:0] pop_p;
  logic clr;

  assign clr = (state == S_IDLE) && start;

  cass_stream_buf #(.BLK(BLK), .WIN(WB)) u_bb (.clk, .rst_n, .clr,
    .push(blk_valid && blk_type == ST_BMP), .push_data(blk_data), .pop_n(pop_b),
    .level(level[ST_BMP]), .win(win_b));
  cass_stream_buf #(.BLK(BLK), .WIN(WE)) u_be (.clk, .rst_n, .clr,
    .push(blk_valid && blk_type == ST_EXP), .push_data(blk_data), .pop_n(pop_e),
    .level(level[ST_EXP]), .win(win_e));
  cass_stream_buf #(.BLK(BLK), .WIN(WS)) u_bs (.clk, .rst_n, .clr,
    .push(blk_valid && blk_type == ST_SPM), .push_data(blk_data), .pop_n(pop_s),
    .level(level[ST_SPM]), .win(win_s));
  cass_stream_buf #(.BLK(BLK), .WIN(WV)) u_bv (.clk, .rst_n, .clr,
    .push(blk_valid && blk_type == ST_VLO), .push_data(blk_data), .pop_n(pop_v),
    .level(level[ST_VLO]), .win(win_v));
  cass_stream_buf #(.BLK(BLK), .WIN(WP)) u_bp (.clk, .rst_n, .clr,
    .push(blk_valid && blk_type == ST_PRN), .push_data(blk_data), .pop_n(pop_p),
    .level(level[ST_PRN]), .win(win_p));

  // ---------------- unary exponent path ----------------
  logic [EW-1:0]            u_nbits, u_ncodes;
  logic [EXPW-1:0][RW-1:0]  u_rank, u_end;
  logic [EXPW-1:0][7:0]     u_exp;
  logic [EXPW-1:0]          u_miss;
  logic [KW-1:0]            u_take;

  assign u_nbits = (int'(level[ST_EXP]) >= EXPW) ? EW'(EXPW) : EW'(level[ST_EXP]);

  cass_unary_decoder #(.EXPW(EXPW), .RW(RW)) u_ud (
    .win(win_e), .nbits(u_nbits), .ncodes(u_ncodes), .rank(u_rank), .endpos(u_end));

  cass_exp_lut #(.NSYM(NSYM), .NRD(EXPW), .RW(RW)) u_lut (
    .clk, .rst_n, .wr_en(lut_wr_en), .wr_idx(lut_wr_idx), .wr_exp(lut_wr_exp),
    .rd_rank(u_rank), .rd_exp(u_exp), .miss(u_miss));

  always_comb begin
    int unsigned need;
    need   = int'(k_q) - int'(got_q);
    u_take = (int'(u_ncodes) < need) ? KW'(u_ncodes) : KW'(need);
  end

  // ---------------- value path ----------------
  bf16_t [TILE-1:0] kept, pruned, dense;
  logic  [KW-1:0]   npr;
  logic             val_ready;
  assign npr = KW'(TILE) - k_q;

  for (genvar i = 0; i < TILE; i++) begin : g_lane
    logic            sgn;
    logic [MHW-1:0]  hi;
    logic [MX_W-1:0] mant;
    always_comb begin
      if (mode_q == MODE_C2) begin
        hi  = win_s[i*SPW2 +: MHW];
        sgn = win_s[i*SPW2 + MHW];
      end else begin
        hi  = MHW'(win_s[i*SPW1 +: SPW1-1]);
        sgn = win_s[i*SPW1 + SPW1 - 1];
      end
    end
    cass_mant_concat #(.TRUNC(TRUNC)) u_mc (
      .mode(mode_q), .full(full_q), .hi(hi), .lo(win_v[i*TRUNC +: TRUNC]), .mant(mant));
    cass_dyn_shifter u_ds (
      .mode(mode_q), .sign(sgn), .exp(mode_q == MODE_C2 ? shexp_q : exp_q[i]),
      .mant(mant), .value(kept[i]));
    assign pruned[i] = win_p[i*BF_W +: BF_W];
  end

  cass_value_concat #(.N(TILE)) u_vc (
    .bitmap(bmp_q), .full(full_q), .kept(kept), .pruned(pruned), .dense(dense));

  always_comb begin
    int unsigned spw;
    spw = (mode_q == MODE_C2) ? SPW2 : SPW1;
    val_ready = int'(level[ST_SPM]) >= int'(k_q) * spw;
    if (full_q)
      val_ready = val_ready && int'(level[ST_VLO]) >= int'(k_q) * TRUNC
                            && int'(level[ST_PRN]) >= int'(npr) * BF_W;
  end

  // ---------------- pops ----------------
  always_comb begin
    pop_b = '0; pop_e = '0; pop_s = '0; pop_v = '0; pop_p = '0;
    case (state)
      S_BMP:  if (int'(level[ST_BMP]) >= TILE) pop_b = ($clog2(WB+1))'(TILE);
      S_UEXP: if (u_take != 0) pop_e = ($clog2(WE+1))'(u_end[u_take-1]) + 1'b1;
      S_MXE:  if (level[ST_EXP] >= 8) pop_e = ($clog2(WE+1))'(8);
      S_VAL:  if (val_ready) begin
                pop_s = ($clog2(WS+1))'(int'(k_q) * ((mode_q == MODE_C2) ? SPW2 : SPW1));
                if (full_q) begin
                  pop_v = ($clog2(WV+1))'(int'(k_q) * TRUNC);
                  pop_p = ($clog2(WP+1))'(int'(npr) * BF_W);
                end
              end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode_q     <= MODE_C1;
      full_q     <= 1'b0;
      tiles_left <= '0;
      bmp_q      <= '0;
      k_q        <= '0;
      got_q      <= '0;
      exp_q      <= '0;
      shexp_q    <= '0;
      out_data   <= '0;
      done       <= 1'b0;
      err        <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          mode_q     <= job_mode;
          full_q     <= job_full;
          tiles_left <= job_ntiles;
          err        <= 1'b0;
          if (job_ntiles == 0) done <= 1'b1;
          else                 state <= S_BMP;
        end
        S_BMP: if (int'(level[ST_BMP]) >= TILE) begin
          bmp_q <= win_b;
          k_q   <= KW'($countones(win_b));
          got_q <= '0;
          if (mode_q == MODE_C2)      state <= S_MXE;
          else if (win_b == '0)       state <= S_VAL;
          else                        state <= S_UEXP;
        end
        S_UEXP: begin
          for (int i = 0; i < TILE; i++)
            if (i >= int'(got_q) && i < int'(got_q) + int'(u_take))
              exp_q[i] <= u_exp[i - int'(got_q)];
          for (int c = 0; c < EXPW; c++)
            if (c < int'(u_take) && u_miss[c]) err <= 1'b1;
          if (u_take == 0 && int'(level[ST_EXP]) >= EXPW) err <= 1'b1; // codeword longer than a window
          got_q <= got_q + u_take;
          if (got_q + u_take == k_q) state <= S_VAL;
        end
        S_MXE: if (level[ST_EXP] >= 8) begin
          shexp_q <= win_e[7:0];
          state   <= S_VAL;
        end
        S_VAL: if (val_ready) begin
          out_data <= dense;
          state    <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          tiles_left <= tiles_left - 1'b1;
          if (tiles_left == 16'd1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_BMP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT);

  // The decoded data buffer holds its tile until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
