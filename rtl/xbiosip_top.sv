// xbiosip_top: approximate Pan-Tompkins QRS pre-processing and signal-processing unit.
//
// Five streaming stages in a row: low-pass filter, high-pass filter, derivative,
// squarer and moving-window integrator.  Every stage is built from 32-bit
// ripple-carry adders and 16x16 recursive multipliers whose K least significant
// bits use approximate cells (ApproxAdd5 and AppMultV1 by default).  The K of each
// stage is a parameter; the defaults 10 / 12 / 2 / 8 / 16 are design B9, the
// configuration that detected every peak of the evaluation database at about 19.7x
// lower energy than the accurate unit.  Setting every K to 0 gives the accurate
// reference unit (A2).
//
// Interface: one 16-bit signed ECG sample per in_valid pulse (200 samples/s in the
// application, up to one per clock here).  Each stage output is brought out with
// its own valid, so the band-passed signal (hpf_out, the intermediate quality
// point) and the integrated signal (mwi_out, fed to peak detection) are both
// available; peak detection and adaptive thresholding are not part of this unit.
// Timing: each stage has a latency of one clock, so mwi_out appears five clocks
// after its input sample.  The *_sat outputs flag samples clamped to 16 bits.
module xbiosip_top
  import xbiosip_pkg::*;
#(
  parameter int unsigned K_LPF     = 10,
  parameter int unsigned K_HPF     = 12,
  parameter int unsigned K_DER     = 2,
  parameter int unsigned K_SQR     = 8,
  parameter int unsigned K_MWI     = 16,
  parameter int unsigned MWI_N     = 30,
  parameter mult_type_e  MULT_TYPE = MULT_APPROX_V1,
  parameter add_type_e   ADD_TYPE  = ADD_APPROX5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  sample_t          in_sample,
  output logic             lpf_valid,
  output sample_t          lpf_out,
  output logic             lpf_sat,
  output logic             hpf_valid,
  output sample_t          hpf_out,
  output logic             hpf_sat,
  output logic             der_valid,
  output sample_t          der_out,
  output logic             der_sat,
  output logic             sqr_valid,
  output logic [ACC_W-1:0] sqr_out,
  output logic             mwi_valid,
  output logic [ACC_W-1:0] mwi_out
);

  lpf_stage #(.K(K_LPF), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_lpf (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_sample(in_sample),
    .out_valid(lpf_valid), .out_sample(lpf_out), .out_sat(lpf_sat));

  hpf_stage #(.K(K_HPF), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_hpf (
    .clk(clk), .rst_n(rst_n), .in_valid(lpf_valid), .in_sample(lpf_out),
    .out_valid(hpf_valid), .out_sample(hpf_out), .out_sat(hpf_sat));

  der_stage #(.K(K_DER), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_der (
    .clk(clk), .rst_n(rst_n), .in_valid(hpf_valid), .in_sample(hpf_out),
    .out_valid(der_valid), .out_sample(der_out), .out_sat(der_sat));

  sqr_stage #(.K(K_SQR), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_sqr (
    .clk(clk), .rst_n(rst_n), .in_valid(der_valid), .in_sample(der_out),
    .out_valid(sqr_valid), .out_square(sqr_out));

  mwi_stage #(.N(MWI_N), .IN_SHIFT(5), .K(K_MWI), .ADD_TYPE(ADD_TYPE)) u_mwi (
    .clk(clk), .rst_n(rst_n), .in_valid(sqr_valid), .in_square(sqr_out),
    .out_valid(mwi_valid), .out_sum(mwi_out));

endmodule
