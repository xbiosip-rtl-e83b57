// tb_fa_cell: exhaustive test of the accurate and ApproxAdd5 one-bit adder cells.
// All eight input combinations are applied to both cell types; the accurate cell
// is compared with a + b + cin, the ApproxAdd5 cell with sum = b, cout = a.
module tb_fa_cell;
  import xbiosip_pkg::*;

  logic a, b, cin;
  logic s_acc, c_acc, s_ax, c_ax;
  int checks = 0, failures = 0;

  fa_cell #(.TYPE(ADD_ACC))     u_acc (.a(a), .b(b), .cin(cin), .sum(s_acc), .cout(c_acc));
  fa_cell #(.TYPE(ADD_APPROX5)) u_ax  (.a(a), .b(b), .cin(cin), .sum(s_ax),  .cout(c_ax));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] t;
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      t = 2'(a) + 2'(b) + 2'(cin);
      checks += 4;
      if ({c_acc, s_acc} !== t) begin failures++; $display("AccAdd %b%b%b -> %b%b", a, b, cin, c_acc, s_acc); end
      if (s_ax !== b) begin failures++; $display("ApproxAdd5 sum wrong for %b%b%b", a, b, cin); end
      if (c_ax !== a) begin failures++; $display("ApproxAdd5 cout wrong for %b%b%b", a, b, cin); end
      // The approximate cell must differ from the exact one in some rows.
      if (v == 7 && s_ax !== 1'b1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
