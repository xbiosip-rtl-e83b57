// xbiosip_pkg: types and constants shared by the approximate Pan-Tompkins datapath.
//
// The datapath carries 16-bit signed samples between stages (the ECG is digitised
// by a 16-bit ADC) and computes inside each stage with 32-bit adders and 16x16
// multipliers, the widths used for the arithmetic library.  The enums select which
// elementary cell a larger adder or multiplier uses in its approximate LSB region.
// Only the accurate cells, ApproxAdd5 and AppMultV1 are provided: these are the
// cells used for the evaluated designs.  The saturating rescale function is this
// design's own choice for bringing a 32-bit stage result back to 16 bits.
package xbiosip_pkg;

  localparam int unsigned SAMPLE_W = 16;  // ADC / inter-stage sample width
  localparam int unsigned ACC_W    = 32;  // adder width inside a stage

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [ACC_W-1:0]    acc_t;

  // Elementary 1-bit adder used in the approximate LSBs.
  typedef enum int unsigned {
    ADD_ACC     = 0,   // accurate full adder (AccAdd)
    ADD_APPROX5 = 5    // ApproxAdd5: Sum = B, Cout = A
  } add_type_e;

  // Elementary 2x2 multiplier used where the partial product lies in the LSBs.
  typedef enum int unsigned {
    MULT_ACC       = 0,  // accurate 2x2 multiplier (AccMult)
    MULT_APPROX_V1 = 1   // AppMultV1: 3 x 3 = 7, every other product exact
  } mult_type_e;

  // Arithmetic shift right by sh, then clamp into the signed 16-bit range.
  function automatic sample_t sat_shift(acc_t v, int unsigned sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(32767))       return sample_t'(16'sh7fff);
    else if (s < acc_t'(-32768)) return sample_t'(16'sh8000);
    else                         return sample_t'(s);
  endfunction

  // True when sat_shift(v, sh) had to clamp.
  function automatic logic sat_hit(acc_t v, int unsigned sh);
    acc_t s;
    s = v >>> sh;
    return (s > acc_t'(32767)) || (s < acc_t'(-32768));
  endfunction

endpackage
