// tb_mult2x2_cell: exhaustive test of the accurate and AppMultV1 2x2 multipliers.
// Every one of the 16 operand pairs is applied; the accurate cell must return
// a * b, AppMultV1 must return a * b except 3 * 3 = 7.
module tb_mult2x2_cell;
  import xbiosip_pkg::*;

  logic [1:0] a, b;
  logic [3:0] p_acc, p_v1;
  int checks = 0, failures = 0;

  mult2x2_cell #(.TYPE(MULT_ACC))       u_acc (.a(a), .b(b), .p(p_acc));
  mult2x2_cell #(.TYPE(MULT_APPROX_V1)) u_v1  (.a(a), .b(b), .p(p_v1));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] exact;
    for (int v = 0; v < 16; v++) begin
      {a, b} = 4'(v);
      #1;
      exact = 4'(a) * 4'(b);
      checks += 2;
      if (p_acc !== exact) begin failures++; $display("AccMult %0d*%0d=%0d", a, b, p_acc); end
      if (p_v1 !== ((a == 3 && b == 3) ? 4'd7 : exact)) begin
        failures++; $display("AppMultV1 %0d*%0d=%0d", a, b, p_v1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
