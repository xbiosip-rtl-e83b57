// der_stage: Pan-Tompkins five-tap derivative, giving the slope of the QRS complex.
//
//     y(n) = ( 2 x(n) + x(n-1) - x(n-3) - 2 x(n-4) ) / 8
// The coefficient magnitudes 2 and 1 are the ones the paper names for this stage;
// the full set and the division by 8 (shift 3) come from the original Pan-Tompkins
// derivative.  All five taps, including the zero one, have a multiplier, and four
// adders sum them.  K defaults to 2 approximate LSBs, the setting of design B9.
// Timing and handshake as approx_fir: latency 1 cycle, one sample per cycle.
module der_stage
  import xbiosip_pkg::*;
#(
  parameter int unsigned K         = 2,
  parameter mult_type_e  MULT_TYPE = MULT_APPROX_V1,
  parameter add_type_e   ADD_TYPE  = ADD_APPROX5
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in_sample,
  output logic    out_valid,
  output sample_t out_sample,
  output logic    out_sat
);

  localparam int DER_COEF [5] = '{2, 1, 0, -1, -2};

  approx_fir #(.NTAPS(5), .COEF(DER_COEF), .SHIFT(3), .K(K),
               .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_fir (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
    .out_valid(out_valid), .out_sample(out_sample), .out_sat(out_sat));

endmodule
