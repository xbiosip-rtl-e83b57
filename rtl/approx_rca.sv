// approx_rca: N-bit ripple-carry adder with an approximate LSB region.
//
// Bit positions 0 .. K-1 use the approximate cell chosen by ADD_TYPE ("XA"), bit
// positions K .. N-1 use accurate full adders ("FA"); the carry ripples from cin
// through all N cells, so the approximate region hands its (approximate) carry into
// the accurate part.  This is the structure of the paper's larger bit-width adder.
// With ADD_APPROX5 the low K sum bits equal b[K-1:0] and the carry into bit K equals
// a[K-1] (or cin when K = 0).  K = 0 gives an exact adder.  Purely combinational;
// the result wraps modulo 2^N and cout is the carry out of the top cell.
module approx_rca
  import xbiosip_pkg::*;
#(
  parameter int unsigned N        = 32,
  parameter int unsigned K        = 0,
  parameter add_type_e   ADD_TYPE = ADD_APPROX5
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         cin,
  output logic [N-1:0] sum,
  output logic         cout
);

  logic [N:0] c;
  assign c[0] = cin;

  for (genvar i = 0; i < N; i++) begin : g_bit
    if (i < K) begin : g_xa
      fa_cell #(.TYPE(ADD_TYPE)) u_cell (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end else begin : g_fa
      fa_cell #(.TYPE(ADD_ACC)) u_cell (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end
  end

  assign cout = c[N];

endmodule
