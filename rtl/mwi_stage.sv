// mwi_stage: moving-window integrator, the last Pan-Tompkins stage.
//
// Sums the last N squared samples, y(n) = sum_{k=0..N-1} s(n-k), with a chain of
// N-1 32-bit ripple-carry adders whose K LSBs are approximate (K defaults to 16,
// the setting of design B9); the stage has adders only, as the paper notes.  N
// defaults to 30 samples, the 150 ms window of the original Pan-Tompkins detector
// at 200 samples/s.  Each squared sample is divided by 2^IN_SHIFT (default 32, close
// to the 1/N average) before it enters the window, so that the 30-term sum cannot
// overflow 32 bits; the window length and this scaling are this design's choices.
// In the adder chain the running sum is operand "a" and the new term operand "b".
// Timing: when in_valid is high the sum over in_square and the N-1 stored terms is
// registered on the next clock edge with out_valid high (latency 1 cycle).
module mwi_stage
  import xbiosip_pkg::*;
#(
  parameter int unsigned N        = 30,
  parameter int unsigned IN_SHIFT = 5,
  parameter int unsigned K        = 16,
  parameter add_type_e   ADD_TYPE = ADD_APPROX5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ACC_W-1:0] in_square,
  output logic             out_valid,
  output logic [ACC_W-1:0] out_sum
);

  logic [ACC_W-1:0] dly  [N-1];
  logic [ACC_W-1:0] term [N];
  logic [ACC_W-1:0] psum [N];

  assign term[0] = in_square >> IN_SHIFT;
  for (genvar i = 1; i < N; i++) begin : g_term
    assign term[i] = dly[i-1];
  end

  assign psum[0] = term[0];
  for (genvar i = 1; i < N; i++) begin : g_add
    logic unused_cout;
    approx_rca #(.N(ACC_W), .K(K), .ADD_TYPE(ADD_TYPE)) u_add (
      .a(psum[i-1]), .b(term[i]), .cin(1'b0), .sum(psum[i]), .cout(unused_cout));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N - 1; i++) dly[i] <= '0;
      out_valid <= 1'b0;
      out_sum   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dly[0] <= term[0];
        for (int i = 1; i < N - 1; i++) dly[i] <= dly[i-1];
        out_sum <= psum[N-1];
      end
    end
  end

endmodule
