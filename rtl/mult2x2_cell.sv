// mult2x2_cell: elementary 2x2 unsigned multiplier of the approximate library.
//
// TYPE = MULT_ACC is the accurate 2x2 multiplier (AccMult), p = a * b.
// TYPE = MULT_APPROX_V1 is AppMultV1, the under-designed multiplier of Kulkarni et
// al.: it returns 3 bits, is exact for every input pair except 3 x 3, for which it
// returns 7 (0111) instead of 9, and leaves Out(3) constant 0.  Dropping the fourth
// output bit removes most of the carry logic.  Purely combinational.
module mult2x2_cell
  import xbiosip_pkg::*;
#(
  parameter mult_type_e TYPE = MULT_ACC
) (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);

  if (TYPE == MULT_APPROX_V1) begin : g_v1
    assign p[0] = a[0] & b[0];
    assign p[1] = (a[1] & b[0]) | (a[0] & b[1]);
    assign p[2] = a[1] & b[1];
    assign p[3] = 1'b0;
  end else begin : g_acc
    logic c;
    assign c    = a[1] & b[0] & a[0] & b[1];
    assign p[0] = a[0] & b[0];
    assign p[1] = (a[1] & b[0]) ^ (a[0] & b[1]);
    assign p[2] = (a[1] & b[1]) ^ c;
    assign p[3] = (a[1] & b[1]) & c;
  end

endmodule
