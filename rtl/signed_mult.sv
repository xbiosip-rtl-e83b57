// signed_mult: 16x16 signed multiplier for the filter stages.
//
// The operands are two's-complement samples and coefficients, while the recursive
// multiplier works on unsigned numbers.  This block therefore takes the magnitude
// of each operand (16 bits are enough, -32768 becomes 0x8000), multiplies the
// magnitudes in rec_mult with K approximate LSBs, and negates the 32-bit product
// when the operand signs differ.  The sign handling is this design's own choice and
// is exact; only the magnitude product is approximate.  Purely combinational.
module signed_mult
  import xbiosip_pkg::*;
#(
  parameter int unsigned K         = 0,
  parameter mult_type_e  MULT_TYPE = MULT_APPROX_V1,
  parameter add_type_e   ADD_TYPE  = ADD_APPROX5
) (
  input  sample_t a,
  input  sample_t b,
  output acc_t    p
);

  logic [SAMPLE_W-1:0] ma, mb;
  logic [ACC_W-1:0]    mp;
  logic                neg;

  assign ma  = a[SAMPLE_W-1] ? (~a + 1'b1) : a;
  assign mb  = b[SAMPLE_W-1] ? (~b + 1'b1) : b;
  assign neg = a[SAMPLE_W-1] ^ b[SAMPLE_W-1];

  rec_mult #(.N(SAMPLE_W), .K(K), .OFFSET(0), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE))
    u_mag (.a(ma), .b(mb), .p(mp));

  assign p = neg ? -acc_t'(mp) : acc_t'(mp);

endmodule
