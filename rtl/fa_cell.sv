// fa_cell: one-bit adder cell of the approximate arithmetic library.
//
// TYPE = ADD_ACC gives the accurate full adder (AccAdd):
//   sum = a ^ b ^ cin, cout = majority(a, b, cin).
// TYPE = ADD_APPROX5 gives ApproxAdd5 (Gupta et al.), which has no gates at all:
//   sum = b, cout = a.  Its carry input is ignored, which is what makes it the
//   cheapest cell of the library (zero area and energy in the library's synthesis).
// The ApproxAdd5 wiring follows the published cell; the accurate cell is the usual
// full adder.  Purely combinational.
module fa_cell
  import xbiosip_pkg::*;
#(
  parameter add_type_e TYPE = ADD_ACC
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  if (TYPE == ADD_APPROX5) begin : g_approx5
    // cin is intentionally unused by this approximate cell.
    logic unused_cin;
    assign unused_cin = cin;
    assign sum  = b;
    assign cout = a;
  end else begin : g_acc
    assign sum  = a ^ b ^ cin;
    assign cout = (a & b) | (a & cin) | (b & cin);
  end

endmodule
