// tb_approx_rca: random test of the 32-bit adder with 0, 8 and 16 approximate LSBs.
// K = 0 is compared with exact addition; K = 8 and K = 16 (ApproxAdd5) with the
// bit-level reference model, and with the property that their low K sum bits copy b.
module tb_approx_rca;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  logic [31:0] a, b, s0, s8, s16;
  logic        cin, c0, c8, c16;
  int checks = 0, failures = 0;

  approx_rca #(.N(32), .K(0),  .ADD_TYPE(ADD_APPROX5)) u0  (.a(a), .b(b), .cin(cin), .sum(s0),  .cout(c0));
  approx_rca #(.N(32), .K(8),  .ADD_TYPE(ADD_APPROX5)) u8  (.a(a), .b(b), .cin(cin), .sum(s8),  .cout(c8));
  approx_rca #(.N(32), .K(16), .ADD_TYPE(ADD_APPROX5)) u16 (.a(a), .b(b), .cin(cin), .sum(s16), .cout(c16));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [32:0] exact;
    for (int n = 0; n < 3000; n++) begin
      a = $urandom; b = $urandom; cin = 1'($urandom);
      if (n == 0) begin a = 32'h0000_00ff; b = 32'h0000_0001; cin = 1'b0; end
      #1;
      exact = 33'(a) + 33'(b) + 33'(cin);
      checks += 7;
      if ({c0, s0} !== exact) begin failures++; $display("K=0 %h+%h", a, b); end
      if (s8 !== 32'(ref_add(32, 8, 5, 64'(a), 64'(b), cin))) begin failures++; $display("K=8 %h+%h -> %h", a, b, s8); end
      if (c8 !== ref_add_cout(32, 8, 5, 64'(a), 64'(b), cin)) failures++;
      if (s16 !== 32'(ref_add(32, 16, 5, 64'(a), 64'(b), cin))) begin failures++; $display("K=16 %h+%h -> %h", a, b, s16); end
      if (c16 !== ref_add_cout(32, 16, 5, 64'(a), 64'(b), cin)) failures++;
      if (s8[7:0] !== b[7:0]) failures++;
      // Upper part: exact sum of the upper bits plus the carry a[K-1].
      if (s16[31:16] !== 16'(a[31:16] + b[31:16] + 16'(a[15]))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
