// cass_mant_concat -- mantissa concatenator of the decoder.
//
// Joins the high mantissa bits kept in the speculation data with the TRUNC low bits kept in
// the verification data. For a draft read (`full` = 0) the low part is not fetched and is
// replaced by zeros, as the paper's mantissa zero padding. The result is MW bits wide, where
// MW is 7 (BF16 mantissa, Cassandra-1) or 8 (MX magnitude, Cassandra-2); in Cassandra-1 the
// top bit of the MX_W-wide output is zero. Purely combinational.
// Concatenation and zero padding follow the paper; the field widths follow the data format
// in cass_pkg.
module cass_mant_concat
  import cass_pkg::*;
#(
  parameter int unsigned TRUNC = TRUNC_DEF
) (
  input  cmode_e                  mode,
  input  logic                    full,      // 1 = target read, 0 = draft read
  input  logic [MX_W-TRUNC-1:0]   hi,        // Cassandra-1 uses the low MAN_W-TRUNC bits
  input  logic [TRUNC-1:0]        lo,
  output logic [MX_W-1:0]         mant
);
  logic [TRUNC-1:0] lo_eff;
  assign lo_eff = full ? lo : '0;

  always_comb begin
    if (mode == MODE_C2) mant = {hi, lo_eff};
    else                 mant = {1'b0, hi[MAN_W-TRUNC-1:0], lo_eff};
  end
endmodule
