// lpf_stage: Pan-Tompkins low-pass filter (cut-off about 12 Hz at 200 samples/s).
//
// A 10th-order, 11-tap FIR filter with 11 multipliers, 10 adders and 10 sample
// registers, as the paper counts them.  The coefficients 1 2 3 4 5 6 5 4 3 2 1 are
// the impulse response of the classic Pan-Tompkins low-pass filter
// (1 - z^-6)^2 / (1 - z^-1)^2, which has a DC gain of 36; the output is divided by
// 32 (shift 5) and saturated to 16 bits.  The coefficients and the scaling are
// taken from the original Pan-Tompkins filter, not printed in the paper.
// K defaults to 10 approximate LSBs, the LPF setting of design B9.
// Timing and handshake as approx_fir: latency 1 cycle, one sample per cycle.
module lpf_stage
  import xbiosip_pkg::*;
#(
  parameter int unsigned K         = 10,
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

  localparam int LPF_COEF [11] = '{1, 2, 3, 4, 5, 6, 5, 4, 3, 2, 1};

  approx_fir #(.NTAPS(11), .COEF(LPF_COEF), .SHIFT(5), .K(K),
               .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_fir (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
    .out_valid(out_valid), .out_sample(out_sample), .out_sat(out_sat));

endmodule
