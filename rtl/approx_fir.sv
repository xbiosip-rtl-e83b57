// approx_fir: streaming FIR filter built from approximate adders and multipliers.
//
// Each Pan-Tompkins filter stage is an FIR filter: NTAPS-1 sample registers form
// the delay line, one signed multiplier per tap forms COEF[i] * x(n-i), and a chain
// of NTAPS-1 32-bit ripple-carry adders sums the products.  Every multiplier and
// adder in the stage has its K least significant bits approximated with MULT_TYPE
// and ADD_TYPE cells.  In the adder chain the running sum is operand "a" and the
// new product operand "b" (this design's choice).  The 32-bit sum is shifted right
// arithmetically by SHIFT and saturated to 16 bits to feed the next stage (the
// scaling is also this design's choice; the stage gains come from the classic
// Pan-Tompkins filters).
//
// Timing: one sample per clock at most.  When in_valid is high, the product sum is
// formed from in_sample and the delay line, registered into out_sample with
// out_valid high on the next clock edge (latency 1 cycle), and the delay line
// shifts.  out_sat marks an output that was clamped.  Reset clears the delay line.
module approx_fir
  import xbiosip_pkg::*;
#(
  parameter int unsigned NTAPS     = 11,
  parameter int          COEF [NTAPS] = '{1, 2, 3, 4, 5, 6, 5, 4, 3, 2, 1},
  parameter int unsigned SHIFT     = 5,
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

  sample_t dly [NTAPS-1];     // x(n-1) .. x(n-NTAPS+1)
  sample_t win [NTAPS];       // x(n) .. x(n-NTAPS+1)
  acc_t    prod [NTAPS];
  acc_t    psum [NTAPS];

  assign win[0] = in_sample;
  for (genvar i = 1; i < NTAPS; i++) begin : g_win
    assign win[i] = dly[i-1];
  end

  for (genvar i = 0; i < NTAPS; i++) begin : g_tap
    signed_mult #(.K(K), .MULT_TYPE(MULT_TYPE), .ADD_TYPE(ADD_TYPE)) u_mul (
      .a(win[i]), .b(sample_t'(COEF[i])), .p(prod[i]));
  end

  assign psum[0] = prod[0];
  for (genvar i = 1; i < NTAPS; i++) begin : g_add
    logic unused_cout;
    approx_rca #(.N(ACC_W), .K(K), .ADD_TYPE(ADD_TYPE)) u_add (
      .a(psum[i-1]), .b(prod[i]), .cin(1'b0), .sum(psum[i]), .cout(unused_cout));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NTAPS - 1; i++) dly[i] <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
      out_sat    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dly[0] <= in_sample;
        for (int i = 1; i < NTAPS - 1; i++) dly[i] <= dly[i-1];
        out_sample <= sat_shift(psum[NTAPS-1], SHIFT);
        out_sat    <= sat_hit(psum[NTAPS-1], SHIFT);
      end
    end
  end

endmodule
