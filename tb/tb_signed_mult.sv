// tb_signed_mult: test of the signed 16x16 multiplier.
// K = 0 must give the exact signed product for random and corner operands
// (including -32768); K = 8 is compared with the reference model.
module tb_signed_mult;
  import xbiosip_pkg::*;
  import xbiosip_ref_pkg::*;

  sample_t a, b;
  acc_t    p0, p8;
  int checks = 0, failures = 0;

  signed_mult #(.K(0)) u0 (.a(a), .b(b), .p(p0));
  signed_mult #(.K(8)) u8 (.a(a), .b(b), .p(p8));

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
      if (n == 0) begin a = -16'sd32768; b = -16'sd32768; end
      if (n == 1) begin a = -16'sd32768; b = 16'sd32767; end
      if (n == 2) begin a = -16'sd5; b = 16'sd31; end
      #1;
      checks += 2;
      if (p0 !== 32'(a) * 32'(b)) begin failures++; $display("K=0 %0d*%0d=%0d", a, b, p0); end
      if (p8 !== ref_smul(8, 1, 5, a, b)) begin failures++; $display("K=8 %0d*%0d=%0d", a, b, p8); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
