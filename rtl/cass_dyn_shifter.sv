// cass_dyn_shifter -- dynamic shifter and exponent accumulator for one value.
//
// Rebuilds one BF16 word from a kept value's sign, concatenated mantissa and exponent.
// Cassandra-1 (unary): the exponent comes from the codebook LUT and the 7-bit mantissa is used
// as it is, so the word is {sign, exp, mant[6:0]}.
// Cassandra-2 (MX): `exp` is the tile's shared exponent and `mant` an 8-bit magnitude whose
// hidden one sits lz places below the top. A parallel zero counter (cass_zero_counter, bits
// fed most significant first) finds the first one; its count lz+1 says how far to shift.
// The mantissa is shifted left by lz, the hidden one dropped, and lz is subtracted from the
// shared exponent. A zero magnitude gives a signed zero. If lz reaches the shared exponent the
// result is flushed to zero (underflow); the paper does not treat this case.
// Shifting and subtracting follow the paper's Cassandra-2 dataflow. Purely combinational.
module cass_dyn_shifter
  import cass_pkg::*;
(
  input  cmode_e          mode,
  input  logic            sign,
  input  logic [7:0]      exp,       // LUT exponent (C1) or shared exponent (C2)
  input  logic [MX_W-1:0] mant,
  output bf16_t           value
);
  logic [MX_W-1:0]      msb_first;
  logic [MX_W-1:0][4:0] zc_cnt;
  logic [3:0]           zc_ones;
  logic                 zc_last;
  logic [4:0]           zc_tail;

  always_comb
    for (int j = 0; j < MX_W; j++) msb_first[j] = mant[MX_W-1-j];

  cass_zero_counter #(.W(MX_W), .CW(5)) u_zc (
    .bits(msb_first), .cin('0), .cnt(zc_cnt), .num_ones(zc_ones),
    .last_bit(zc_last), .tail(zc_tail)
  );

  always_comb begin
    logic [4:0]      shamt;   // lz + 1 of the first one
    logic [3:0]      lz;
    logic [MX_W-1:0] norm;
    shamt = '0;
    for (int j = MX_W-1; j >= 0; j--)
      if (zc_cnt[j] != 0) shamt = zc_cnt[j];
    lz   = 4'(shamt - 5'd1);
    norm = mant << lz;
    if (mode == MODE_C1) begin
      value = {sign, exp, mant[MAN_W-1:0]};
    end else if (zc_ones == 0 || {4'd0, lz} >= exp) begin
      value = {sign, 15'd0};
    end else begin
      value = {sign, exp - {4'd0, lz}, norm[MAN_W-1:0]};
    end
  end
endmodule
