// hpf_stage: Pan-Tompkins high-pass filter (cut-off about 5 Hz at 200 samples/s).
//
// A 32-tap FIR filter with 32 multipliers and 31 adders, the counts the paper gives
// for this stage.  It is the classic Pan-Tompkins high-pass filter written as an
// all-pass delay minus a 32-point moving sum:
//     y(n) = 32 x(n-16) - sum_{k=0..31} x(n-k),
// so coefficient 16 is 31 and all others are -1.  The output is divided by 32
// (shift 5) and saturated to 16 bits.  The coefficients and scaling follow the
// original Pan-Tompkins filter; the paper gives only the cut-off and unit counts.
// K defaults to 12 approximate LSBs, the HPF setting of design B9.
// Timing and handshake as approx_fir: latency 1 cycle, one sample per cycle.
module hpf_stage
  import xbiosip_pkg::*;
#(
  parameter int unsigned K         = 12,
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

  localparam int HPF_COEF [32] = '{-1, -1, -1, -1, -1, -1, -1, -1,
                                   -1, -1, -1, -1, -1, -1, -1, -1,
                                   31, -1, -1, -1, -1, -1, -1, -1,
                                   -1, -1, -1, -1, -1, -1, -1, -1};

  approx_fir #(.NTAPS(32), .COEF(HPF_COEF), .SHIFT(5), .K(K),
               .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_fir (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
    .out_valid(out_valid), .out_sample(out_sample), .out_sat(out_sat));

endmodule
