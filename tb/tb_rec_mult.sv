// tb_rec_mult: test of the recursive multiplier.
// A 16x16 instance with K = 0 must equal a * b for random and corner operands;
// 16x16 instances with K = 8 and K = 16 (AppMultV1 + ApproxAdd5) and a 4x4
// instance with K = 4 (checked exhaustively) are compared with the reference model.
module tb_rec_mult;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  logic [15:0] a, b;
  logic [31:0] p0, p8, p16;
  logic [3:0]  a4, b4;
  logic [7:0]  p4;
  int checks = 0, failures = 0, approx_diff = 0;

  rec_mult #(.N(16), .K(0))  u0  (.a(a), .b(b), .p(p0));
  rec_mult #(.N(16), .K(8))  u8  (.a(a), .b(b), .p(p8));
  rec_mult #(.N(16), .K(16)) u16 (.a(a), .b(b), .p(p16));
  rec_mult #(.N(4),  .K(4))  u4  (.a(a4), .b(b4), .p(p4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      a = 16'($urandom); b = 16'($urandom);
      if (n == 0) begin a = 16'hffff; b = 16'hffff; end
      if (n == 1) begin a = 16'h0003; b = 16'h0003; end
      #1;
      checks += 3;
      if (p0 !== 32'(a) * 32'(b)) begin failures++; $display("K=0 %h*%h=%h", a, b, p0); end
      if (p8 !== 32'(ref_mul(16, 8, 0, 1, 5, 64'(a), 64'(b)))) begin failures++; $display("K=8 %h*%h=%h", a, b, p8); end
      if (p16 !== 32'(ref_mul(16, 16, 0, 1, 5, 64'(a), 64'(b)))) begin failures++; $display("K=16 %h*%h=%h", a, b, p16); end
      if (p8 !== p0) approx_diff++;
    end
    for (int v = 0; v < 256; v++) begin
      {a4, b4} = 8'(v);
      #1;
      checks++;
      if (p4 !== 8'(ref_mul(4, 4, 0, 1, 5, 64'(a4), 64'(b4)))) begin failures++; $display("4x4 %0d*%0d=%0d", a4, b4, p4); end
    end
    // The approximation must actually change some products.
    checks++;
    if (approx_diff == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
