// sqr_stage: point-by-point squarer, y(n) = x(n)^2.
//
// The square makes every sample positive and emphasises the large slopes of the
// QRS complex.  The magnitude of the 16-bit signed input is multiplied by itself in
// one 16x16 recursive multiplier with K approximate LSBs (K defaults to 8, the
// setting of design B9); the 32-bit result is unsigned.
// Timing: when in_valid is high the square is registered on the next clock edge
// and out_valid is high for that cycle (latency 1 cycle, one sample per cycle).
module sqr_stage
  import xbiosip_pkg::*;
#(
  parameter int unsigned K         = 8,
  parameter mult_type_e  MULT_TYPE = MULT_APPROX_V1,
  parameter add_type_e   ADD_TYPE  = ADD_APPROX5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  sample_t          in_sample,
  output logic             out_valid,
  output logic [ACC_W-1:0] out_square
);

  logic [SAMPLE_W-1:0] mag;
  logic [ACC_W-1:0]    sq;

  assign mag = in_sample[SAMPLE_W-1] ? (~in_sample + 1'b1) : in_sample;

  rec_mult #(.N(SAMPLE_W), .K(K), .OFFSET(0), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE))
    u_sq (.a(mag), .b(mag), .p(sq));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_square <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_square <= sq;
    end
  end

endmodule
